// cherid_store_guard -- committed-store queue with inline-ID store cancel.
//
// Stores through an inline-ID capability commit architecturally before their
// ID is checked (the paper's choice, to keep the store buffer effective). They
// wait here in a FIFO; when a store reaches the head and carries an inline
// check, the guard reads its line, compares the byte at the inline ID offset
// with the capability ID and only then writes the line; on a mismatch the
// write is dropped and `cancel` pulses (an imprecise violation, as in the
// paper). Stores with no check (ID-zero capabilities, csetmemID, and in-page
// stores, which were checked before commit) are written directly.
// Choices of this design: FIFO depth 4; one line transaction outstanding; the
// read-compare-write pair is not interleaved with another store. Stores never
// cross a line (the pipeline only accepts naturally aligned accesses).
//
// Interface: push/push_ready enqueue; the line port is valid/ready with one
// response (mem_resp_valid, read data for reads) per request, in order.
// `empty` is high when no store is queued or in flight.
module cherid_store_guard
  import cherid_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // committed stores
  input  logic        push,
  output logic        push_ready,
  input  addr_t       st_addr,      // physical byte address
  input  logic [1:0]  st_size,      // log2 bytes
  input  logic [63:0] st_data,
  input  logic        st_check,     // inline-ID check required
  input  objid_t      st_cap_id,
  input  logic [LINE_OFF_W-1:0] st_id_off, // inline ID offset within the line
  // line port
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output lreq_t       mem_req,
  input  logic        mem_resp_valid,
  input  line_t       mem_resp_rdata,
  // status
  output logic        empty,
  output logic        cancel,       // one cycle: a store was dropped (at its response)
  output logic        written       // one cycle: a store reached memory (at its response)
);

  typedef struct packed {
    addr_t       addr;
    logic [1:0]  size;
    logic [63:0] data;
    logic        check;
    objid_t      cap_id;
    logic [LINE_OFF_W-1:0] id_off;
  } sq_entry_t;

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  sq_entry_t q [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;
  logic [PTR_W:0]   count;

  typedef enum logic [2:0] {S_IDLE, S_RD_REQ, S_RD_WAIT, S_WR_REQ, S_WR_WAIT} st_e;
  st_e state;

  sq_entry_t head;
  logic      pop;
  assign head       = q[rd_ptr];
  assign push_ready = (count != (PTR_W+1)'(DEPTH));
  assign empty      = (count == '0) && (state == S_IDLE);

  // line image of the head store
  logic [LINE_OFF_W-1:0] off;
  logic [7:0]            nbytes_mask;
  line_t                 wline;
  line_be_t              wbe;
  always_comb begin
    off         = head.addr[LINE_OFF_W-1:0];
    nbytes_mask = 8'((16'd1 << (16'd1 << head.size)) - 16'd1);
    wline       = line_t'(head.data) << (32'(off) * 8);
    wbe         = line_be_t'(nbytes_mask) << off;
  end

  always_comb begin
    mem_req_valid = (state == S_RD_REQ) || (state == S_WR_REQ);
    mem_req.we    = (state == S_WR_REQ);
    mem_req.addr  = {head.addr[XLEN-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}};
    mem_req.wdata = wline;
    mem_req.be    = (state == S_WR_REQ) ? wbe : '0;
  end

  logic id_ok;
  assign id_ok = (mem_resp_rdata[32'(head.id_off)*8 +: ID_W] == head.cap_id);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE:    if (count != '0) state <= head.check ? S_RD_REQ : S_WR_REQ;
        S_RD_REQ:  if (mem_req_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (mem_resp_valid) begin
                     if (id_ok) state <= S_WR_REQ;
                     else state <= S_IDLE;
                   end
        S_WR_REQ:  if (mem_req_ready) state <= S_WR_WAIT;
        S_WR_WAIT: if (mem_resp_valid) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  assign cancel  = (state == S_RD_WAIT) && mem_resp_valid && !id_ok;
  assign written = (state == S_WR_WAIT) && mem_resp_valid;
  assign pop     = cancel || written;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push && push_ready) wr_ptr <= PTR_W'((int'(wr_ptr) + 1) % DEPTH);
      if (pop)                rd_ptr <= PTR_W'((int'(rd_ptr) + 1) % DEPTH);
      count <= count + (PTR_W+1)'(push && push_ready) - (PTR_W+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push && push_ready)
      q[wr_ptr] <= '{addr: st_addr, size: st_size, data: st_data, check: st_check,
                     cap_id: st_cap_id, id_off: st_id_off};
  end

endmodule
