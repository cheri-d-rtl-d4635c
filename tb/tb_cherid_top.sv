// tb_cherid_top -- end-to-end test of the CHERI-D load/store extension.
//
// Runs the whole design at its default parameters in front of a behavioural
// line memory and a TLB model (physical = virtual + 0x100000). A small
// allocator and revoker model, written as tasks here, drive the slot
// lifetime of the heap: malloc derives a capability with ID zero, sets IDMODE
// and IDLOC (csetIDloc), writes the memory ID (csetmemID), fences, sets the
// capability ID (csetcapID) and narrows the bounds to the user size; free
// checks for a double free (memory ID newer than the capability ID), then
// increments the memory ID, or, when the capability ID is 254, writes 255 and
// quarantines the slot; the revoker sweep reads the memory ID (cgetmemID) of
// every held capability with a non-zero ID, clears the tag of those whose
// slot reads 255, and then returns the slot with memory ID 0.
// One inline slot is driven through its whole ID space (IDs 1..254), then
// quarantined, swept and reused. Every user access is compared with a byte
// model of memory, and each mechanism is counted; a mechanism that never
// happened is a failure.
module tb_cherid_top;
  import cherid_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  capop_e      capop;
  cap_t        capop_cap, capop_cap_out;
  logic [63:0] capop_operand, capop_int_out;
  logic        capop_priv, capop_priv_fault;
  logic        req_valid = 0, req_ready, resp_valid;
  mreq_t       req;
  mresp_t      resp;
  addr_t       tlb_va, tlb_pa;
  logic        dv, dr, drv;
  lreq_t       dreq;
  line_t       drd;
  logic ev_hit, ev_miss, ev_fault, ev_wait, ev_fence, ev_cancel, ev_written;

  assign tlb_pa = tlb_va + 64'h10_0000;

  cherid_top dut (
    .clk(clk), .rst_n(rst_n),
    .capop(capop), .capop_cap(capop_cap), .capop_operand(capop_operand), .capop_priv(capop_priv),
    .capop_cap_out(capop_cap_out), .capop_int_out(capop_int_out), .capop_priv_fault(capop_priv_fault),
    .req_valid(req_valid), .req_ready(req_ready), .req(req), .resp_valid(resp_valid), .resp(resp),
    .tlb_va(tlb_va), .tlb_pa(tlb_pa),
    .dc_req_valid(dv), .dc_req_ready(dr), .dc_req(dreq), .dc_resp_valid(drv), .dc_resp_rdata(drd),
    .ev_idbuf_hit(ev_hit), .ev_idbuf_miss(ev_miss), .ev_id_fault(ev_fault), .ev_sg_wait(ev_wait),
    .ev_fence(ev_fence), .ev_store_cancel(ev_cancel), .ev_store_written(ev_written));

  tb_line_mem #(.LATENCY(3)) mem (.clk(clk), .rst_n(rst_n), .req_valid(dv), .req_ready(dr),
    .req(dreq), .resp_valid(drv), .resp_rdata(drd));

  int checks = 0, failures = 0, cyc = 0;
  // mechanism counters
  int n_hit = 0, n_miss = 0, n_idfault = 0, n_wait = 0, n_fence = 0, n_cancel = 0;
  int n_inline_ok = 0, n_inpage_ok = 0, n_precise_store = 0, n_double_free = 0;
  int n_quarantine = 0, n_revoked = 0, n_tagclear = 0, n_privfault = 0, n_uaf_tag = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_hit) n_hit++;
    if (ev_miss) n_miss++;
    if (ev_fault) n_idfault++;
    if (ev_wait) n_wait++;
    if (ev_fence) n_fence++;
    if (ev_cancel) n_cancel++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------- core-side helpers ----------------
  task automatic capop_do(capop_e o, cap_t c, logic [63:0] opd, logic p, output cap_t r, output logic f);
    capop = o; capop_cap = c; capop_operand = opd; capop_priv = p;
    #1;
    r = capop_cap_out; f = capop_priv_fault;
  endtask

  task automatic mop(mop_e o, cap_t c, addr_t off, int sz, logic [63:0] wd, output mresp_t r);
    @(negedge clk);
    req.op = o; req.cap = c; req.offset = off; req.size = 2'(sz); req.wdata = wd;
    req_valid = 1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    r = resp;
  endtask

  // expected user data, byte-addressed by virtual address
  logic [7:0] model [addr_t];
  function automatic logic [7:0] mget(addr_t a);
    return model.exists(a) ? model[a] : 8'h00;
  endfunction

  task automatic user_store(cap_t c, addr_t off, int sz, logic [63:0] d, logic expect_written);
    mresp_t r;
    mop(MOP_STORE, c, off, sz, d, r);
    chk(r.exc == EXC_NONE, "store accepted");
    if (expect_written)
      for (int b = 0; b < (1 << sz); b++) model[c.cursor + off + addr_t'(b)] = d[b*8 +: 8];
  endtask

  task automatic user_load_ok(cap_t c, addr_t off, int sz);
    mresp_t r;
    logic [63:0] e;
    e = 0;
    for (int b = 0; b < (1 << sz); b++) e[b*8 +: 8] = mget(c.cursor + off + addr_t'(b));
    mop(MOP_LOAD, c, off, sz, 0, r);
    chk(r.exc == EXC_NONE && r.rdata == e, $sformatf("load %h+%0h got %h exp %h exc %0d", c.cursor, off, r.rdata, e, r.exc));
    if (r.exc == EXC_NONE) begin
      if (c.idmode == IDMODE_INLINE) n_inline_ok++; else n_inpage_ok++;
    end
  endtask

  task automatic fence();
    mresp_t r;
    mop(MOP_FENCE, '0, 0, 0, 0, r);
    chk(r.exc == EXC_NONE, "fence");
  endtask

  // ---------------- allocator model ----------------
  cap_t root;

  // slot: [slot_base, slot_base + slot_size); user gets `req_size` bytes
  task automatic malloc(addr_t slot_base, int slot_size, int req_size, idmode_e m, idloc_t loc,
                        objid_t gen, output cap_t user);
    cap_t a, b;
    logic f;
    mresp_t r;
    a = root;
    a.base = (m == IDMODE_INLINE) ? slot_base : {slot_base[XLEN-1:12], 12'h000};
    a.top  = (m == IDMODE_INLINE) ? slot_base + addr_t'(slot_size) : a.base + 4096;
    a.cursor = slot_base;
    capop_do(CAPOP_SETIDLOC, a, 64'({m, loc}), 1'b1, b, f);
    chk(b.tag && !f, "csetIDloc by allocator");
    mop(MOP_SETMEMID, b, 0, 0, 64'(gen), r);
    chk(r.exc == EXC_NONE, "csetmemID by allocator");
    fence();
    capop_do(CAPOP_SETCAPID, b, 64'(gen), 1'b1, a, f);
    chk(a.tag && a.id == gen, "csetcapID by allocator");
    a.base = slot_base;                         // narrow to the user request
    a.top  = slot_base + addr_t'(req_size);
    user = a;
  endtask

  // returns 1 if the free was accepted
  task automatic free(cap_t c, output logic ok);
    mresp_t r;
    cap_t a, b;
    logic f;
    objid_t memid;
    mop(MOP_GETMEMID, c, 0, 0, 0, r);
    memid = r.rdata[7:0];
    if (memid != c.id) begin       // already freed (ID moved on or quarantined)
      n_double_free++;
      ok = 0;
      return;
    end
    a = root;
    a.base = c.base; a.top = (c.idmode == IDMODE_INLINE) ? c.base + 64 : {c.base[XLEN-1:12], 12'h000} + 4096;
    if (c.idmode == IDMODE_INLINE) a.top = {c.base[XLEN-1:6], 6'd0} + 64;
    else a.base = {c.base[XLEN-1:12], 12'h000};
    a.cursor = c.cursor;
    capop_do(CAPOP_SETIDLOC, a, 64'({c.idmode, c.idloc}), 1'b1, b, f);
    if (c.id == ID_LAST_USE) begin
      mop(MOP_SETMEMID, b, 0, 0, 64'(ID_QUARANTINE), r);
      n_quarantine++;
    end else begin
      mop(MOP_SETMEMID, b, 0, 0, 64'(c.id + 1), r);
    end
    chk(r.exc == EXC_NONE, "free writes memory ID");
    fence();
    ok = 1;
  endtask

  // ---------------- revoker model ----------------
  cap_t held [$];   // capabilities the program still holds

  task automatic sweep();
    mresp_t r;
    for (int i = 0; i < held.size(); i++) begin
      if (held[i].tag && held[i].id != ID_NONE) begin
        mop(MOP_GETMEMID, held[i], 0, 0, 0, r);
        if (r.rdata[7:0] == ID_QUARANTINE) begin
          held[i].tag = 0;
          n_revoked++;
        end
      end
    end
  endtask

  // ---------------- test ----------------
  initial begin
    cap_t u, u_old, v, v_old, x, w;
    logic f, ok;
    mresp_t r;
    req = '0;
    capop = CAPOP_GETCAPID; capop_cap = '0; capop_operand = 0; capop_priv = 0;
    root.tag = 1; root.base = 0; root.top = 64'hFFFF_FFFF_FFFF_F000; root.cursor = 0;
    root.id = 0; root.idmode = IDMODE_INLINE; root.idloc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // privilege and guarded manipulation
    capop_do(CAPOP_SETIDLOC, root, 64'd5, 1'b0, x, f);
    if (f) n_privfault++;
    chk(f, "unprivileged csetIDloc faults");

    // ---- inline slot A: 16-byte slot at 0x20010, user asks 12 bytes, IDLOC 32
    malloc(64'h2_0010, 16, 12, IDMODE_INLINE, 6'd32, 8'd1, u);
    capop_do(CAPOP_SETCAPID, u, 64'd0, 1'b1, x, f);
    if (!x.tag) n_tagclear++;
    chk(!x.tag, "user capability cannot clear its ID");
    user_store(u, 0, 3, 64'h1122_3344_5566_7788, 1);
    user_load_ok(u, 0, 3);      // also waits for the store to drain
    user_store(u, 8, 2, 64'hA5A5_0F0F, 1);
    user_load_ok(u, 8, 2);
    mop(MOP_LOAD, u, 12, 0, 0, r);
    chk(r.exc == EXC_BOUNDS, "ID byte is outside the user bounds");
    free(u, ok);
    chk(ok, "free A");
    u_old = u;
    held.push_back(u_old);
    mop(MOP_LOAD, u_old, 0, 3, 0, r);
    chk(r.exc == EXC_ID, "use after free (inline load) trapped");
    user_store(u_old, 0, 3, 64'hBAD0_BAD0_BAD0_BAD0, 0);   // commits, then cancelled
    free(u_old, ok);
    chk(!ok, "double free detected");
    malloc(64'h2_0010, 16, 12, IDMODE_INLINE, 6'd32, 8'd2, u);
    user_load_ok(u, 0, 3);      // old data, not the stale store
    held.push_back(u);

    // ---- in-page slot B: 256-byte slot 2 of page 0x30000, IDLOC 3
    malloc(64'h3_0200, 256, 200, IDMODE_INPAGE, 6'd3, 8'd1, v);
    for (int i = 0; i < 8; i++) user_store(v, addr_t'(8 * i), 3, {$urandom, $urandom}, 1);
    for (int i = 0; i < 8; i++) user_load_ok(v, addr_t'(8 * i), 3);
    // neighbour slot 5 on the same page, different IDLOC, shares the ID table
    malloc(64'h3_0500, 256, 256, IDMODE_INPAGE, 6'd6, 8'd1, w);
    user_store(w, 16, 2, 64'hFEED_BEEF, 1);
    user_load_ok(w, 16, 2);
    free(v, ok);
    v_old = v;
    held.push_back(v_old);
    mop(MOP_STORE, v_old, 0, 3, 64'hBAD, r);
    if (r.exc == EXC_ID) n_precise_store++;
    chk(r.exc == EXC_ID, "in-page stale store: precise exception");
    mop(MOP_LOAD, v_old, 0, 3, 0, r);
    chk(r.exc == EXC_ID, "in-page stale load trapped");
    malloc(64'h3_0200, 256, 200, IDMODE_INPAGE, 6'd3, 8'd2, v);
    user_load_ok(v, 0, 3);      // old value kept: stale store never committed
    held.push_back(v);
    held.push_back(w);

    // ---- inline slot C: the whole ID space, 1..254, then quarantine
    malloc(64'h2_0040, 16, 16 - 1, IDMODE_INLINE, 6'd16, 8'd1, x);
    for (int g = 1; g <= 254; g++) begin
      cap_t prev;
      user_store(x, addr_t'(8 * (g % 2)), 2, 64'(g * 32'h0101_0101), 1);
      user_load_ok(x, addr_t'(8 * (g % 2)), 2);
      prev = x;
      free(x, ok);
      chk(ok, "free C");
      mop(MOP_LOAD, prev, 0, 0, 0, r);
      chk(r.exc == EXC_ID, $sformatf("stale gen %0d trapped", g));
      if (g < 254) malloc(64'h2_0040, 16, 15, IDMODE_INLINE, 6'd16, objid_t'(g + 1), x);
      else held.push_back(prev);
    end
    mop(MOP_GETMEMID, x, 0, 0, 0, r);
    chk(r.rdata[7:0] == ID_QUARANTINE, "slot C quarantined after 254 lifetimes");

    // ---- revocation sweep, then the slot is handed out again
    sweep();
    chk(n_revoked == 1, $sformatf("one capability revoked (%0d)", n_revoked));
    foreach (held[i]) if (held[i].base == 64'h2_0040) begin
      mop(MOP_LOAD, held[i], 0, 0, 0, r);
      if (r.exc == EXC_TAG) n_uaf_tag++;
      chk(r.exc == EXC_TAG, "revoked capability has no tag");
    end
    begin
      cap_t a, b;
      a = root; a.base = 64'h2_0040; a.top = 64'h2_0050; a.cursor = a.base;
      capop_do(CAPOP_SETIDLOC, a, 64'({IDMODE_INLINE, 6'd16}), 1'b1, b, f);
      mop(MOP_SETMEMID, b, 0, 0, 64'd0, r);     // revoked -> free
      chk(r.exc == EXC_NONE, "slot returned");
      fence();
    end
    malloc(64'h2_0040, 16, 15, IDMODE_INLINE, 6'd16, 8'd1, x);
    user_store(x, 0, 3, 64'h0DDC_0FFE_E0DD_F00D, 1);
    user_load_ok(x, 0, 3);

    // ---- still-live capabilities keep working
    user_load_ok(u, 8, 2);
    user_load_ok(w, 16, 2);

    // ---- every mechanism must have happened
    $display("mechanisms: inline_ok=%0d inpage_ok=%0d idbuf_hit=%0d idbuf_miss=%0d id_fault=%0d",
             n_inline_ok, n_inpage_ok, n_hit, n_miss, n_idfault);
    $display("            store_cancel=%0d precise_store=%0d sg_wait=%0d fence=%0d double_free=%0d",
             n_cancel, n_precise_store, n_wait, n_fence, n_double_free);
    $display("            quarantine=%0d revoked=%0d revoked_access=%0d tag_clear=%0d priv_fault=%0d",
             n_quarantine, n_revoked, n_uaf_tag, n_tagclear, n_privfault);
    chk(n_inline_ok > 0, "inline check passed");
    chk(n_inpage_ok > 0, "in-page check passed");
    chk(n_hit > 0, "ID buffer hit");
    chk(n_miss > 0, "ID buffer miss and fill");
    chk(n_idfault > 0, "ID mismatch exception");
    chk(n_cancel == 1, $sformatf("inline store cancelled (%0d)", n_cancel));
    chk(n_precise_store > 0, "precise in-page store exception");
    chk(n_wait > 0, "load waited for store guard");
    chk(n_fence > 0, "fence flush");
    chk(n_double_free > 0, "double free");
    chk(n_quarantine == 1, "quarantine");
    chk(n_revoked > 0 && n_uaf_tag > 0, "revocation");
    chk(n_tagclear > 0, "tag cleared by guarded manipulation");
    chk(n_privfault > 0, "privilege fault");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
