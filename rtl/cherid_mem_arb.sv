// cherid_mem_arb -- two-requester arbiter for the data-cache line port.
//
// Requester 1 (the store guard) has priority over requester 0 (the load/ID
// path of the pipeline) so that committed stores drain. Exactly one line
// transaction is outstanding at a time: after a grant the arbiter records the
// owner and routes the single response back to it; no new request is granted
// until that response has arrived. This arbitration is this design's choice;
// the paper does not describe the cache port. Combinational request path,
// one register for the owner.
module cherid_mem_arb
  import cherid_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  r0_valid,
  output logic  r0_ready,
  input  lreq_t r0_req,
  output logic  r0_resp_valid,
  input  logic  r1_valid,
  output logic  r1_ready,
  input  lreq_t r1_req,
  output logic  r1_resp_valid,
  // to the data cache
  output logic  m_valid,
  input  logic  m_ready,
  output lreq_t m_req,
  input  logic  m_resp_valid
);

  logic busy_q, owner_q;
  logic sel;   // 1: requester 1 is granted

  always_comb begin
    sel      = r1_valid;
    m_valid  = !busy_q && (r0_valid || r1_valid);
    m_req    = sel ? r1_req : r0_req;
    r1_ready = !busy_q && m_ready && r1_valid;
    r0_ready = !busy_q && m_ready && !r1_valid;
    r0_resp_valid = busy_q && !owner_q && m_resp_valid;
    r1_resp_valid = busy_q &&  owner_q && m_resp_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= 1'b0;
    end else if (!busy_q) begin
      if (m_valid && m_ready) begin
        busy_q  <= 1'b1;
        owner_q <= sel;
      end
    end else if (m_resp_valid) begin
      busy_q <= 1'b0;
    end
  end

  // a response only arrives for a granted request
  assert property (@(posedge clk) disable iff (!rst_n) m_resp_valid |-> busy_q);

endmodule
