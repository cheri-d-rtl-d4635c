// tb_line_mem -- behavioural model of a data cache / memory with a line port.
//
// Not part of the design: it stands in for the core's L1 data cache in the
// testbenches. It accepts one line request at a time (ready is low while a
// request is in flight) and answers each request, read or write, with one
// response LATENCY cycles later; reads return the line, writes update the
// bytes whose enable is set. Storage is an associative array of lines; lines
// never written read as zero. Backdoor functions read and write single bytes.
module tb_line_mem
  import cherid_pkg::*;
#(
  parameter int LATENCY = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  lreq_t req,
  output logic  resp_valid,
  output line_t resp_rdata
);

  line_t mem [addr_t];
  logic  busy;
  int    cnt;
  lreq_t cur;
  int    n_reads, n_writes;

  assign req_ready = !busy;

  function automatic line_t get_line(addr_t la);
    if (mem.exists(la)) return mem[la];
    return '0;
  endfunction

  function automatic void poke(addr_t a, logic [7:0] v);
    addr_t la = {a[XLEN-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}};
    line_t l = get_line(la);
    l[32'(a[LINE_OFF_W-1:0])*8 +: 8] = v;
    mem[la] = l;
  endfunction

  function automatic logic [7:0] peek(addr_t a);
    addr_t la = {a[XLEN-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}};
    line_t l = get_line(la);
    return l[32'(a[LINE_OFF_W-1:0])*8 +: 8];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      cnt        <= 0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1;
        cur  <= req;
        cnt  <= LATENCY - 1;
      end else if (busy) begin
        if (cnt == 0) begin
          line_t l;
          l = get_line(cur.addr);
          if (cur.we) begin
            for (int b = 0; b < LINE_BYTES; b++)
              if (cur.be[b]) l[b*8 +: 8] = cur.wdata[b*8 +: 8];
            mem[cur.addr] = l;
            n_writes <= n_writes + 1;
          end else begin
            n_reads <= n_reads + 1;
          end
          resp_valid <= 1'b1;
          resp_rdata <= l;
          busy       <= 1'b0;
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end

endmodule
