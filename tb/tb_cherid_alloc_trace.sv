// tb_cherid_alloc_trace -- random heap trace through the CHERI-D load/store path.
//
// Runs the whole design at its default parameters under a random sequence of
// malloc, free, load, store and double-free attempts, the kind of
// small-object allocation pattern the design is aimed at. The heap has inline
// slots (16-byte size class, three slots per 64-byte line, ID byte at the top
// of each slot) and in-page slots (256-byte size class, fifteen slots per
// 4 KiB page; the sixteenth overlaps the page's ID table and is never used).
// The allocator model reuses the most recently freed slot of a class first
// (like a thread cache), so slots run through their ID space quickly: after
// the 254th lifetime a slot is quarantined (memory ID 255), and when four
// slots are quarantined the revoker sweeps the capabilities the program holds,
// clears the tag of those that point at quarantined slots, and the slots are
// returned with memory ID 0.
// Every access is checked against a model: through a live capability it must
// succeed with the modelled data; through a freed capability a load and an
// in-page store must raise EXC_ID, an inline store must commit but leave memory
// unchanged; through a revoked capability the access must raise EXC_TAG; a
// second free must be detected from the memory ID.
module tb_cherid_alloc_trace;
  import cherid_pkg::*;

  localparam int N_OPS     = 60000;
  localparam int N_ILINES  = 2;     // inline lines: 6 inline slots
  localparam int N_PAGES   = 1;     // in-page pages: 15 in-page slots
  localparam int N_ISLOTS  = 3 * N_ILINES;
  localparam int N_PSLOTS  = 15 * N_PAGES;
  localparam int N_SLOTS   = N_ISLOTS + N_PSLOTS;
  localparam int Q_SWEEP   = 4;     // quarantined slots that trigger a sweep
  localparam addr_t IHEAP  = 64'h4_0000;
  localparam addr_t PHEAP  = 64'h5_0000;

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

  int checks = 0, failures = 0;
  int n_malloc = 0, n_free = 0, n_uaf = 0, n_df = 0, n_quar = 0, n_sweep = 0, n_revoked = 0;
  int n_tagged_off = 0, n_cancel = 0, n_hit = 0, n_miss = 0;

  always @(posedge clk) begin
    if (ev_cancel) n_cancel++;
    if (ev_hit) n_hit++;
    if (ev_miss) n_miss++;
  end

  initial begin
    repeat (50000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  task automatic capop_do(capop_e o, cap_t c, logic [63:0] opd, output cap_t r);
    capop = o; capop_cap = c; capop_operand = opd; capop_priv = 1'b1;
    #1;
    r = capop_cap_out;
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

  // ---------------- slots ----------------
  typedef enum { SL_FREE, SL_ALLOC, SL_QUAR } sstate_e;
  sstate_e st   [N_SLOTS];
  int      gen  [N_SLOTS];    // memory ID of the slot
  int      stamp[N_SLOTS];    // time of last free (LIFO reuse)
  int      now = 0;
  cap_t    root;

  function automatic logic is_inline(int s); return s < N_ISLOTS; endfunction
  function automatic addr_t slot_base(int s);
    if (is_inline(s)) return IHEAP + addr_t'((s / 3) * 64 + (s % 3) * 16);
    return PHEAP + addr_t'(((s - N_ISLOTS) / 15) * 4096 + ((s - N_ISLOTS) % 15) * 256);
  endfunction
  function automatic int slot_size(int s); return is_inline(s) ? 16 : 256; endfunction
  function automatic idloc_t slot_loc(int s);
    if (is_inline(s)) return idloc_t'((s % 3) * 16 + 16);
    return idloc_t'((s - N_ISLOTS) % 15 + 1);
  endfunction

  // allocator capability over the region that holds the slot's ID
  function automatic cap_t alloc_cap(int s);
    cap_t a = root;
    if (is_inline(s)) begin a.base = slot_base(s); a.top = a.base + 16; end
    else begin a.base = {slot_base(s)[XLEN-1:12], 12'h000}; a.top = a.base + 4096; end
    a.cursor = slot_base(s);
    a.idmode = IDMODE_INLINE; a.idloc = 0; a.id = 0;
    return a;
  endfunction

  task automatic set_memid(int s, int v);
    cap_t a, b;
    mresp_t r;
    a = alloc_cap(s);
    capop_do(CAPOP_SETIDLOC, a, 64'({is_inline(s) ? IDMODE_INLINE : IDMODE_INPAGE, slot_loc(s)}), b);
    chk(b.tag, "allocator csetIDloc");
    mop(MOP_SETMEMID, b, 0, 0, 64'(v), r);
    chk(r.exc == EXC_NONE, "allocator csetmemID");
    mop(MOP_FENCE, '0, 0, 0, 0, r);
  endtask

  // ---------------- program state ----------------
  typedef struct { cap_t c; int slot; int g; } ptr_t;
  ptr_t held [$];
  logic [7:0] model [addr_t];

  function automatic logic [7:0] mget(addr_t a); return model.exists(a) ? model[a] : 8'h00; endfunction

  task automatic do_malloc(logic want_inline);
    int best = -1;
    cap_t a, b;
    ptr_t p;
    int ureq;
    for (int s = 0; s < N_SLOTS; s++)
      if (st[s] == SL_FREE && is_inline(s) == want_inline && (best < 0 || stamp[s] > stamp[best])) best = s;
    if (best < 0) return;
    if (gen[best] == 0) begin gen[best] = 1; set_memid(best, 1); end
    a = alloc_cap(best);
    capop_do(CAPOP_SETIDLOC, a, 64'({is_inline(best) ? IDMODE_INLINE : IDMODE_INPAGE, slot_loc(best)}), b);
    capop_do(CAPOP_SETCAPID, b, 64'(gen[best]), a);
    chk(a.tag && a.id == objid_t'(gen[best]), "malloc capability");
    ureq = is_inline(best) ? $urandom_range(8, 15) : $urandom_range(64, 256);
    a.base = slot_base(best); a.top = a.base + addr_t'(ureq); a.cursor = a.base;
    st[best] = SL_ALLOC;
    p.c = a; p.slot = best; p.g = gen[best];
    held.push_back(p);
    if (held.size() > 48) void'(held.pop_front());
    n_malloc++;
  endtask

  function automatic logic live(ptr_t p); return p.c.tag && st[p.slot] == SL_ALLOC && gen[p.slot] == p.g; endfunction

  task automatic do_free(int i);
    ptr_t p = held[i];
    mresp_t r;
    if (!p.c.tag) return;
    mop(MOP_GETMEMID, p.c, 0, 0, 0, r);
    if (r.rdata[7:0] != p.c.id) begin
      chk(!live(p), "free refused only for a dead pointer");
      n_df++;
      return;
    end
    chk(live(p), "memory ID matches only for a live pointer");
    if (p.g == int'(ID_LAST_USE)) begin
      set_memid(p.slot, int'(ID_QUARANTINE));
      gen[p.slot] = int'(ID_QUARANTINE);
      st[p.slot] = SL_QUAR;
      n_quar++;
    end else begin
      gen[p.slot] = p.g + 1;
      set_memid(p.slot, gen[p.slot]);
      st[p.slot] = SL_FREE;
    end
    stamp[p.slot] = ++now;
    n_free++;
  endtask

  task automatic do_access(int i);
    ptr_t p = held[i];
    mresp_t r;
    int sz, lim;
    addr_t off;
    logic [63:0] d, e;
    logic is_store;
    lim = int'(p.c.top - p.c.base);
    sz  = $urandom_range(0, 3);
    while ((1 << sz) > lim) sz--;
    off = addr_t'(($urandom_range(0, lim - (1 << sz))) & ~((1 << sz) - 1));
    is_store = 1'($urandom);
    d = {$urandom, $urandom};
    if (is_store) begin
      mop(MOP_STORE, p.c, off, sz, d, r);
      if (!p.c.tag)            chk(r.exc == EXC_TAG, "revoked store -> EXC_TAG");
      else if (live(p))        chk(r.exc == EXC_NONE, "live store");
      else if (is_inline(p.slot)) chk(r.exc == EXC_NONE, "stale inline store commits (cancelled later)");
      else                     chk(r.exc == EXC_ID, "stale in-page store -> EXC_ID");
      if (live(p)) for (int b = 0; b < (1 << sz); b++) model[p.c.base + off + addr_t'(b)] = d[b*8 +: 8];
      else if (p.c.tag) n_uaf++;
    end else begin
      e = 0;
      for (int b = 0; b < (1 << sz); b++) e[b*8 +: 8] = mget(p.c.base + off + addr_t'(b));
      mop(MOP_LOAD, p.c, off, sz, 0, r);
      if (!p.c.tag)     chk(r.exc == EXC_TAG, "revoked load -> EXC_TAG");
      else if (live(p)) chk(r.exc == EXC_NONE && r.rdata == e, $sformatf("live load slot %0d got %h exp %h exc %0d", p.slot, r.rdata, e, r.exc));
      else begin        chk(r.exc == EXC_ID, "stale load -> EXC_ID"); n_uaf++; end
    end
  endtask

  task automatic sweep();
    mresp_t r;
    foreach (held[i]) begin
      if (held[i].c.tag && held[i].c.id != ID_NONE) begin
        mop(MOP_GETMEMID, held[i].c, 0, 0, 0, r);
        if (r.rdata[7:0] == ID_QUARANTINE) begin
          chk(st[held[i].slot] == SL_QUAR, "revoke only quarantined slots");
          held[i].c.tag = 0;
          n_revoked++;
        end
      end
    end
    for (int s = 0; s < N_SLOTS; s++)
      if (st[s] == SL_QUAR) begin
        set_memid(s, 0);
        gen[s] = 0;
        st[s] = SL_FREE;
      end
    n_sweep++;
  endtask

  initial begin
    int q, op;
    req = '0;
    capop = CAPOP_GETCAPID; capop_cap = '0; capop_operand = 0; capop_priv = 0;
    root.tag = 1; root.base = 0; root.top = 64'hFFFF_FFFF_FFFF_F000; root.cursor = 0;
    root.id = 0; root.idmode = IDMODE_INLINE; root.idloc = 0;
    for (int s = 0; s < N_SLOTS; s++) begin st[s] = SL_FREE; gen[s] = 0; stamp[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N_OPS; k++) begin
      op = $urandom_range(0, 99);
      if (op < 30 || held.size() == 0) do_malloc(1'($urandom_range(0, 3) != 0));
      else if (op < 58) begin
        // mostly free a live pointer, sometimes free again a stale one
        int pick = $urandom_range(0, held.size() - 1);
        if ($urandom_range(0, 9) != 0)
          foreach (held[i]) if (live(held[i])) pick = i;
        do_free(pick);
      end
      else do_access($urandom_range(0, held.size() - 1));
      q = 0;
      for (int s = 0; s < N_SLOTS; s++) if (st[s] == SL_QUAR) q++;
      if (q >= Q_SWEEP) sweep();
    end
    $display("trace: malloc=%0d free=%0d stale_access=%0d double_free=%0d quarantined=%0d sweeps=%0d revoked=%0d",
             n_malloc, n_free, n_uaf, n_df, n_quar, n_sweep, n_revoked);
    $display("       store_cancel=%0d idbuf_hit=%0d idbuf_miss=%0d", n_cancel, n_hit, n_miss);
    chk(n_uaf > 0, "stale accesses happened");
    chk(n_df > 0, "double frees happened");
    chk(n_quar > 0 && n_sweep > 0 && n_revoked > 0, "quarantine and sweep happened");
    chk(n_cancel > 0, "inline store cancels happened");
    chk(n_hit > 0 && n_miss > 0, "ID buffer hits and misses happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
