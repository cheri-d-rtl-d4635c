// cherid_lsu -- CHERI-D memory access pipeline with object-ID verification.
//
// Four in-order stages, named as in the paper's description of the
// CHERI-Toooba memory pipeline:
//   AC  register read and address calculation: VA = cursor + offset, tag,
//       alignment and bounds checks, ID address (cherid_id_addr) on the VA;
//   TR  address translation through the external TLB port, and, for in-page
//       ID capabilities, a lookup of the ID buffer with the *virtual* ID
//       address, so that a hit is checked before translation completes;
//   IS  issue: on an ID-buffer miss, the line with the page's ID table is read
//       (same physical page, so no second translation) and the buffer filled;
//       then loads are sent to the data cache, stores are committed into the
//       store guard, fences drain the store guard and flush the ID buffer;
//   RS  response: for loads through inline-ID capabilities the ID byte is
//       taken from the very line that returns the data and compared in the
//       same cycle (no added latency), giving a precise exception.
// A capability with ID zero is never checked. In-page loads and stores and
// inline loads raise precise EXC_ID exceptions; inline stores commit and are
// checked later by the store guard, which cancels the write on mismatch.
// csetmemID writes the ID byte (only through ID-zero capabilities, in bounds);
// cgetmemID reads it without authority beyond a valid tag.
//
// Choices of this design (the paper gives the stages and what is checked, not
// the micro-architecture): one line transaction outstanding; loads and
// cgetmemID wait until the store guard is empty instead of forwarding; a fence
// enters the pipeline as an operation and blocks younger ones until it leaves;
// the TLB answers combinationally in TR and raises no faults; the core always
// accepts a response; loads are zero-extended.
//
// Timing: a request accepted in cycle t is in TR at t+1 and issues at t+2; a
// load's response appears the cycle after the data line returns, with or
// without an inline or buffered in-page ID check. A buffer miss adds one ID
// line read before the data access.
module cherid_lsu
  import cherid_pkg::*;
#(
  parameter int unsigned IDBUF_ENTRIES = 64,
  parameter int unsigned IDBUF_WAYS    = 4,
  parameter int unsigned IDS_PER_ENTRY = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  // core side
  input  logic   req_valid,
  output logic   req_ready,
  input  mreq_t  req,
  output logic   resp_valid,
  output mresp_t resp,
  // TLB (combinational, used in TR)
  output addr_t  tlb_va,
  input  addr_t  tlb_pa,
  // data cache line port (reads only; stores go through the store guard)
  output logic   mem_req_valid,
  input  logic   mem_req_ready,
  output addr_t  mem_req_addr,     // line-aligned physical address
  input  logic   mem_resp_valid,
  input  line_t  mem_resp_rdata,
  // store guard
  output logic   sg_push,
  input  logic   sg_push_ready,
  output addr_t  sg_addr,
  output logic [1:0]  sg_size,
  output logic [63:0] sg_data,
  output logic   sg_check,
  output objid_t sg_cap_id,
  output logic [LINE_OFF_W-1:0] sg_id_off,
  input  logic   sg_empty,
  // events (one-cycle pulses)
  output logic   ev_idbuf_hit,
  output logic   ev_idbuf_miss,
  output logic   ev_id_fault,
  output logic   ev_sg_wait,
  output logic   ev_fence
);

  // ------------------------------------------------------------------
  // Stage payloads
  // ------------------------------------------------------------------
  typedef struct packed {
    mop_e        op;
    objid_t      cap_id;
    idmode_e     idmode;
    addr_t       va;
    addr_t       id_va;
    logic [1:0]  size;
    logic [63:0] wdata;
    logic        check;     // ID check required (load/store, cap ID != 0)
    logic        has_loc;   // IDLOC != 0
    exc_e        exc;
  } p2_t;

  typedef struct packed {
    p2_t         b;
    addr_t       pa;
    addr_t       id_pa;
    logic        need_idf;  // in-page check missed the ID buffer
  } p3_t;

  typedef struct packed {
    mop_e        op;
    logic        mem_wait;  // waiting for a line response
    logic        inl_check; // inline check on the returned line
    objid_t      cap_id;
    logic [LINE_OFF_W-1:0] data_off;
    logic [LINE_OFF_W-1:0] id_off;
    logic [1:0]  size;
    exc_e        exc;
    logic [63:0] rdata;
  } p4_t;

  logic p2_v, p3_v, p4_v;
  p2_t  p2_q;
  p3_t  p3_q;
  p4_t  p4_q;

  // ------------------------------------------------------------------
  // AC stage (combinational on the incoming request)
  // ------------------------------------------------------------------
  addr_t  ac_va, ac_id_va;
  logic   ac_id_valid;
  p2_t    ac;
  logic [4:0] ac_bytes;

  assign ac_va    = req.cap.cursor + req.offset;
  assign ac_bytes = 5'd1 << req.size;

  cherid_id_addr u_idaddr (
    .addr    (ac_va),
    .idmode  (req.cap.idmode),
    .idloc   (req.cap.idloc),
    .id_addr (ac_id_va),
    .id_valid(ac_id_valid)
  );

  function automatic logic in_bounds(addr_t a, logic [4:0] n, addr_t lo, addr_t hi);
    logic [XLEN:0] end_a;
    end_a = {1'b0, a} + (XLEN+1)'(n);
    return (a >= lo) && (end_a <= {1'b0, hi});
  endfunction

  always_comb begin
    ac.op      = req.op;
    ac.cap_id  = req.cap.id;
    ac.idmode  = req.cap.idmode;
    ac.va      = (req.op == MOP_SETMEMID || req.op == MOP_GETMEMID) ? ac_id_va : ac_va;
    ac.id_va   = ac_id_va;
    ac.size    = (req.op == MOP_SETMEMID || req.op == MOP_GETMEMID) ? 2'd0 : req.size;
    ac.wdata   = req.wdata;
    ac.has_loc = ac_id_valid;
    ac.check   = (req.op == MOP_LOAD || req.op == MOP_STORE) && (req.cap.id != ID_NONE);
    ac.exc     = EXC_NONE;
    unique case (req.op)
      MOP_LOAD, MOP_STORE: begin
        if (!req.cap.tag)                                         ac.exc = EXC_TAG;
        else if ((ac_va & (addr_t'(ac_bytes) - addr_t'(1))) != '0)        ac.exc = EXC_ALIGN;
        else if (!in_bounds(ac_va, ac_bytes, req.cap.base, req.cap.top)) ac.exc = EXC_BOUNDS;
      end
      MOP_SETMEMID: begin
        if (!req.cap.tag)                                         ac.exc = EXC_TAG;
        else if (req.cap.id != ID_NONE)                           ac.exc = EXC_ID_PERM;
        else if (!ac_id_valid || !in_bounds(ac_id_va, 5'd1, req.cap.base, req.cap.top))
                                                                  ac.exc = EXC_BOUNDS;
      end
      MOP_GETMEMID: begin
        if (!req.cap.tag)                                         ac.exc = EXC_TAG;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------
  // TR stage
  // ------------------------------------------------------------------
  logic   ib_hit;
  objid_t ib_id;
  logic   ib_fill;
  addr_t  ib_fill_addr;
  logic [IDS_PER_ENTRY*ID_W-1:0] ib_fill_data;
  logic   ib_flush;
  p3_t    tr;
  logic   tr_inpage_chk;

  assign tlb_va = p2_q.va;

  cherid_id_buffer #(
    .ENTRIES      (IDBUF_ENTRIES),
    .WAYS         (IDBUF_WAYS),
    .IDS_PER_ENTRY(IDS_PER_ENTRY)
  ) u_idbuf (
    .clk       (clk),
    .rst_n     (rst_n),
    .lk_addr   (p2_q.id_va),
    .lk_hit    (ib_hit),
    .lk_id     (ib_id),
    .fill_valid(ib_fill),
    .fill_addr (ib_fill_addr),
    .fill_data (ib_fill_data),
    .flush     (ib_flush)
  );

  always_comb begin
    tr_inpage_chk = p2_q.check && (p2_q.idmode == IDMODE_INPAGE) && (p2_q.exc == EXC_NONE);
    tr.b        = p2_q;
    tr.pa       = tlb_pa;
    tr.id_pa    = {tlb_pa[XLEN-1:PAGE_OFF_W], p2_q.id_va[PAGE_OFF_W-1:0]};
    tr.need_idf = tr_inpage_chk && !ib_hit;
    if (tr_inpage_chk && ib_hit && ib_id != p2_q.cap_id) tr.b.exc = EXC_ID;
  end

  // ------------------------------------------------------------------
  // IS stage
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {IS_RUN, IS_IDF_WAIT} is_e;
  is_e    is_st;
  logic   is_done;      // p3 moves to p4 this cycle
  p4_t    is_out;
  logic   is_idf_go;    // ID table read request accepted
  logic   p4_free;
  logic   is_idf_resp;
  objid_t idf_id;
  logic   idf_bad;
  logic   sg_wait;

  assign p4_free     = !p4_v;
  assign is_idf_resp = (is_st == IS_IDF_WAIT) && mem_resp_valid;
  assign idf_id      = mem_resp_rdata[32'(p3_q.id_pa[LINE_OFF_W-1:0])*8 +: ID_W];
  assign idf_bad     = (idf_id != p3_q.b.cap_id);

  // chunk of the ID table holding the ID, for the buffer fill
  localparam int unsigned CHUNK_BITS = IDS_PER_ENTRY * ID_W;
  localparam int unsigned CHUNK_W    = $clog2(IDS_PER_ENTRY);
  assign ib_fill      = is_idf_resp;
  assign ib_fill_addr = p3_q.b.id_va;
  assign ib_fill_data = mem_resp_rdata[32'(p3_q.id_pa[LINE_OFF_W-1:CHUNK_W])*CHUNK_BITS +: CHUNK_BITS];

  always_comb begin
    is_done       = 1'b0;
    is_idf_go     = 1'b0;
    mem_req_valid = 1'b0;
    mem_req_addr  = '0;
    sg_push       = 1'b0;
    ib_flush      = 1'b0;
    sg_wait       = 1'b0;

    is_out.op        = p3_q.b.op;
    is_out.mem_wait  = 1'b0;
    is_out.inl_check = p3_q.b.check && (p3_q.b.idmode == IDMODE_INLINE);
    is_out.cap_id    = p3_q.b.cap_id;
    is_out.data_off  = p3_q.pa[LINE_OFF_W-1:0];
    is_out.id_off    = p3_q.id_pa[LINE_OFF_W-1:0];
    is_out.size      = p3_q.b.size;
    is_out.exc       = p3_q.b.exc;
    is_out.rdata     = '0;

    sg_addr   = (p3_q.b.op == MOP_SETMEMID) ? p3_q.id_pa : p3_q.pa;
    sg_size   = p3_q.b.size;
    sg_data   = p3_q.b.wdata;
    sg_check  = p3_q.b.check && (p3_q.b.idmode == IDMODE_INLINE);
    sg_cap_id = p3_q.b.cap_id;
    sg_id_off = p3_q.id_pa[LINE_OFF_W-1:0];

    if (p3_v && p4_free) begin
      if (is_st == IS_RUN && p3_q.need_idf && p3_q.b.exc == EXC_NONE) begin
        // in-page ID not buffered: read the ID table line of this page
        mem_req_valid = 1'b1;
        mem_req_addr  = {p3_q.id_pa[XLEN-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}};
        is_idf_go     = mem_req_ready;
      end else if (is_st == IS_RUN) begin
        if (p3_q.b.exc != EXC_NONE) begin
          is_done = 1'b1;
        end else begin
          unique case (p3_q.b.op)
            MOP_LOAD, MOP_GETMEMID: begin
              if (p3_q.b.op == MOP_GETMEMID && !p3_q.b.has_loc) begin
                is_done = 1'b1;           // no ID location: reads as zero
              end else if (!sg_empty) begin
                sg_wait = 1'b1;
              end else begin
                mem_req_valid    = 1'b1;
                mem_req_addr     = {p3_q.pa[XLEN-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}};
                is_done          = mem_req_ready;
                is_out.mem_wait  = 1'b1;
                if (p3_q.b.op == MOP_GETMEMID) is_out.inl_check = 1'b0;
              end
            end
            MOP_STORE, MOP_SETMEMID: begin
              sg_push = 1'b1;
              is_done = sg_push_ready;
            end
            MOP_FENCE: begin
              if (sg_empty) begin
                ib_flush = 1'b1;
                is_done  = 1'b1;
              end
            end
            default: is_done = 1'b1;
          endcase
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_st <= IS_RUN;
    end else begin
      unique case (is_st)
        IS_RUN:      if (is_idf_go) is_st <= IS_IDF_WAIT;
        IS_IDF_WAIT: if (mem_resp_valid) is_st <= IS_RUN;
        default:     is_st <= IS_RUN;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // RS stage
  // ------------------------------------------------------------------
  logic   rs_done;
  mresp_t rs_resp;
  logic   rs_resp_now;
  objid_t rs_line_id;
  logic [63:0] rs_word;

  assign rs_resp_now = p4_v && p4_q.mem_wait && mem_resp_valid && (is_st != IS_IDF_WAIT);
  assign rs_line_id  = mem_resp_rdata[32'(p4_q.id_off)*8 +: ID_W];
  assign rs_word     = 64'(mem_resp_rdata >> (32'(p4_q.data_off) * 8));

  always_comb begin
    rs_done      = p4_v && (!p4_q.mem_wait || rs_resp_now);
    rs_resp.exc  = p4_q.exc;
    rs_resp.rdata = p4_q.rdata;
    if (rs_resp_now) begin
      unique case (p4_q.size)
        2'd0:    rs_resp.rdata = {56'd0, rs_word[7:0]};
        2'd1:    rs_resp.rdata = {48'd0, rs_word[15:0]};
        2'd2:    rs_resp.rdata = {32'd0, rs_word[31:0]};
        default: rs_resp.rdata = rs_word;
      endcase
      if (p4_q.inl_check && rs_line_id != p4_q.cap_id) begin
        rs_resp.exc   = EXC_ID;
        rs_resp.rdata = '0;
      end
    end
  end

  assign resp_valid = rs_done;
  assign resp       = rs_resp;

  // ------------------------------------------------------------------
  // Pipeline registers and flow control
  // ------------------------------------------------------------------
  logic p2_adv, fence_inflight;
  assign p2_adv         = p2_v && (!p3_v || is_done);
  assign fence_inflight = (p2_v && p2_q.op == MOP_FENCE) ||
                          (p3_v && p3_q.b.op == MOP_FENCE) ||
                          (p4_v && p4_q.op == MOP_FENCE);
  assign req_ready      = (!p2_v || p2_adv) && !fence_inflight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p2_v <= 1'b0;
      p3_v <= 1'b0;
      p4_v <= 1'b0;
    end else begin
      if (req_valid && req_ready) p2_v <= 1'b1;
      else if (p2_adv)            p2_v <= 1'b0;
      if (p2_adv)                 p3_v <= 1'b1;
      else if (is_done)           p3_v <= 1'b0;
      if (is_done)                p4_v <= 1'b1;
      else if (rs_done)           p4_v <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (req_valid && req_ready) p2_q <= ac;
    if (p2_adv)                 p3_q <= tr;
    if (is_idf_resp) begin
      p3_q.need_idf <= 1'b0;
      if (idf_bad) p3_q.b.exc <= EXC_ID;
    end
    if (is_done)                p4_q <= is_out;
  end

  // ------------------------------------------------------------------
  // Events
  // ------------------------------------------------------------------
  assign ev_idbuf_hit  = p2_adv && p2_q.check && (p2_q.idmode == IDMODE_INPAGE) &&
                         (p2_q.exc == EXC_NONE) && ib_hit;
  assign ev_idbuf_miss = is_idf_go;
  assign ev_id_fault   = resp_valid && (resp.exc == EXC_ID);
  assign ev_sg_wait    = sg_wait;
  assign ev_fence      = ib_flush;

  // one line transaction at a time
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(is_st == IS_IDF_WAIT && p4_v && p4_q.mem_wait));
  // the response port is never asked to take two answers for one request
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid |-> !(p4_v && p4_q.mem_wait));

endmodule
