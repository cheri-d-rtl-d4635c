// cherid_top -- CHERI-D extension of a CHERI core's load/store path.
//
// Puts together the parts the paper adds to the CHERI-Toooba memory pipeline:
// the capability-field execute unit (csetcapID, cgetcapID, csetIDloc,
// cgetIDloc), the four-stage memory pipeline with its ID buffer (loads,
// stores, csetmemID, cgetmemID, fence), and the store guard that checks inline
// IDs of committed stores and cancels mismatching writes. The pipeline and the
// store guard share the data-cache line port through a small arbiter.
// The core, its TLB and the data cache are not part of this design: the TLB
// and the cache appear as ports (a combinational VA->PA port; a valid/ready
// line port with one in-order response per request). The capability-field
// unit is combinational; memory operations follow the timing of cherid_lsu.
module cherid_top
  import cherid_pkg::*;
#(
  parameter int unsigned IDBUF_ENTRIES = 64,
  parameter int unsigned IDBUF_WAYS    = 4,
  parameter int unsigned IDS_PER_ENTRY = 16,
  parameter int unsigned SQ_DEPTH      = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // capability-field instructions (combinational)
  input  capop_e      capop,
  input  cap_t        capop_cap,
  input  logic [63:0] capop_operand,
  input  logic        capop_priv,
  output cap_t        capop_cap_out,
  output logic [63:0] capop_int_out,
  output logic        capop_priv_fault,
  // memory operations
  input  logic        req_valid,
  output logic        req_ready,
  input  mreq_t       req,
  output logic        resp_valid,
  output mresp_t      resp,
  // TLB
  output addr_t       tlb_va,
  input  addr_t       tlb_pa,
  // data cache line port
  output logic        dc_req_valid,
  input  logic        dc_req_ready,
  output lreq_t       dc_req,
  input  logic        dc_resp_valid,
  input  line_t       dc_resp_rdata,
  // events (one-cycle pulses)
  output logic        ev_idbuf_hit,
  output logic        ev_idbuf_miss,
  output logic        ev_id_fault,
  output logic        ev_sg_wait,
  output logic        ev_fence,
  output logic        ev_store_cancel,
  output logic        ev_store_written
);

  cherid_cap_ops u_capops (
    .op        (capop),
    .cap_in    (capop_cap),
    .operand   (capop_operand),
    .priv      (capop_priv),
    .cap_out   (capop_cap_out),
    .int_out   (capop_int_out),
    .priv_fault(capop_priv_fault)
  );

  logic   l_mv, l_mr, l_rv;
  addr_t  l_maddr;
  lreq_t  l_mreq;
  logic   s_mv, s_mr, s_rv;
  lreq_t  s_mreq;
  logic   sg_push, sg_push_ready, sg_check, sg_empty;
  addr_t  sg_addr;
  logic [1:0]  sg_size;
  logic [63:0] sg_data;
  objid_t sg_cap_id;
  logic [LINE_OFF_W-1:0] sg_id_off;

  cherid_lsu #(
    .IDBUF_ENTRIES(IDBUF_ENTRIES),
    .IDBUF_WAYS   (IDBUF_WAYS),
    .IDS_PER_ENTRY(IDS_PER_ENTRY)
  ) u_lsu (
    .clk           (clk),
    .rst_n         (rst_n),
    .req_valid     (req_valid),
    .req_ready     (req_ready),
    .req           (req),
    .resp_valid    (resp_valid),
    .resp          (resp),
    .tlb_va        (tlb_va),
    .tlb_pa        (tlb_pa),
    .mem_req_valid (l_mv),
    .mem_req_ready (l_mr),
    .mem_req_addr  (l_maddr),
    .mem_resp_valid(l_rv),
    .mem_resp_rdata(dc_resp_rdata),
    .sg_push       (sg_push),
    .sg_push_ready (sg_push_ready),
    .sg_addr       (sg_addr),
    .sg_size       (sg_size),
    .sg_data       (sg_data),
    .sg_check      (sg_check),
    .sg_cap_id     (sg_cap_id),
    .sg_id_off     (sg_id_off),
    .sg_empty      (sg_empty),
    .ev_idbuf_hit  (ev_idbuf_hit),
    .ev_idbuf_miss (ev_idbuf_miss),
    .ev_id_fault   (ev_id_fault),
    .ev_sg_wait    (ev_sg_wait),
    .ev_fence      (ev_fence)
  );

  // the pipeline only reads lines
  assign l_mreq = '{we: 1'b0, addr: l_maddr, wdata: '0, be: '0};

  cherid_store_guard #(.DEPTH(SQ_DEPTH)) u_sg (
    .clk           (clk),
    .rst_n         (rst_n),
    .push          (sg_push),
    .push_ready    (sg_push_ready),
    .st_addr       (sg_addr),
    .st_size       (sg_size),
    .st_data       (sg_data),
    .st_check      (sg_check),
    .st_cap_id     (sg_cap_id),
    .st_id_off     (sg_id_off),
    .mem_req_valid (s_mv),
    .mem_req_ready (s_mr),
    .mem_req       (s_mreq),
    .mem_resp_valid(s_rv),
    .mem_resp_rdata(dc_resp_rdata),
    .empty         (sg_empty),
    .cancel        (ev_store_cancel),
    .written       (ev_store_written)
  );

  cherid_mem_arb u_arb (
    .clk          (clk),
    .rst_n        (rst_n),
    .r0_valid     (l_mv),
    .r0_ready     (l_mr),
    .r0_req       (l_mreq),
    .r0_resp_valid(l_rv),
    .r1_valid     (s_mv),
    .r1_ready     (s_mr),
    .r1_req       (s_mreq),
    .r1_resp_valid(s_rv),
    .m_valid      (dc_req_valid),
    .m_ready      (dc_req_ready),
    .m_req        (dc_req),
    .m_resp_valid (dc_resp_valid)
  );

endmodule
