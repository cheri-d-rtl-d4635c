// tb_cherid_lsu -- self-checking test of the CHERI-D memory pipeline.
//
// The pipeline runs in front of a behavioural line memory (3-cycle latency),
// a TLB model that maps each virtual page to physical page VA + 0x100000, and
// a store sink that records committed stores and writes them to memory (the
// sink's `empty` can be held low to test the wait of loads and fences).
// Checks, with values worked out here:
//   * a load through an ID-zero capability takes MEM_LAT + 3 cycles; loads
//     through inline-ID and in-page-ID (buffer hit) capabilities
//     take the same number of cycles (the paper's "no cycle overhead");
//   * an in-page buffer miss adds exactly MEM_LAT + 2 cycles (one ID-table line
//     read) and fills the buffer;
//   * inline load with a stale ID -> precise EXC_ID, no data;
//   * inline store commits with no exception and is handed on with the check
//     request, the capability ID and the ID offset;
//   * in-page store with a stale ID -> precise EXC_ID, nothing committed;
//   * a changed memory ID is seen only after a fence (buffer flush);
//   * csetmemID: written through an ID-zero in-bounds capability, EXC_ID_PERM
//     through a non-zero-ID one, EXC_BOUNDS when the ID lies outside;
//   * cgetmemID returns the memory ID byte of either mode;
//   * tag, alignment and bounds exceptions;
//   * loads and fences wait while committed stores are pending.
//   * random phase: 4000 loads, stores, csetmemID, cgetmemID and fences
//     through ID-zero, inline and in-page capabilities (current or stale ID)
//     against a byte-level model of one page; the sink plays the store guard
//     (a checked store is written only if the line's ID byte matches).
module tb_cherid_lsu;
  import cherid_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   req_valid = 0, req_ready, resp_valid;
  mreq_t  req;
  mresp_t resp;
  addr_t  tlb_va, tlb_pa;
  logic   mv, mr, rv;
  lreq_t  mreq;
  addr_t  maddr;
  assign mreq = '{we: 1'b0, addr: maddr, wdata: '0, be: '0};
  line_t  rdata;
  logic   sg_push, sg_check, sg_empty;
  logic   sg_push_ready = 1;
  addr_t  sg_addr;
  logic [1:0] sg_size;
  logic [63:0] sg_data;
  objid_t sg_cap_id;
  logic [5:0] sg_id_off;
  logic ev_hit, ev_miss, ev_fault, ev_wait, ev_fence;
  logic sink_hold = 0;
  int   checks = 0, failures = 0, cyc = 0;
  int   n_push = 0, n_hit = 0, n_miss = 0, n_wait = 0, n_fence = 0;
  addr_t last_addr; logic last_check; objid_t last_id; logic [5:0] last_off;
  logic [63:0] last_data; logic [1:0] last_size;

  assign tlb_pa   = tlb_va + 64'h10_0000;
  assign sg_empty = !sink_hold;

  cherid_lsu dut (.clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req(req),
    .resp_valid(resp_valid), .resp(resp), .tlb_va(tlb_va), .tlb_pa(tlb_pa),
    .mem_req_valid(mv), .mem_req_ready(mr), .mem_req_addr(maddr), .mem_resp_valid(rv), .mem_resp_rdata(rdata),
    .sg_push(sg_push), .sg_push_ready(sg_push_ready), .sg_addr(sg_addr), .sg_size(sg_size),
    .sg_data(sg_data), .sg_check(sg_check), .sg_cap_id(sg_cap_id), .sg_id_off(sg_id_off),
    .sg_empty(sg_empty), .ev_idbuf_hit(ev_hit), .ev_idbuf_miss(ev_miss), .ev_id_fault(ev_fault),
    .ev_sg_wait(ev_wait), .ev_fence(ev_fence));

  // memory latency; the pipeline adds AC->IS (2 cycles) and the response
  // cycle, and an in-page buffer miss adds one ID-table read (MEM_LAT) plus
  // one cycle to take the ID and one to re-issue
  localparam int MEM_LAT = 3;
  tb_line_mem #(.LATENCY(MEM_LAT)) mem (.clk(clk), .rst_n(rst_n), .req_valid(mv), .req_ready(mr),
    .req(mreq), .resp_valid(rv), .resp_rdata(rdata));

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_hit) n_hit++;
    if (ev_miss) n_miss++;
    if (ev_wait) n_wait++;
    if (ev_fence) n_fence++;
    if (sg_push && sg_push_ready) begin
      n_push++;
      last_addr = sg_addr; last_check = sg_check; last_id = sg_cap_id; last_off = sg_id_off;
      last_data = sg_data; last_size = sg_size;
      // stands in for the store guard: a checked store is written only if
      // the ID byte of its line still equals the capability ID
      if (!sg_check || mem.peek({sg_addr[63:6], 6'd0} + addr_t'(sg_id_off)) == sg_cap_id)
        for (int b = 0; b < (1 << sg_size); b++) mem.poke(sg_addr + addr_t'(b), sg_data[b*8 +: 8]);
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cap_t mkcap(addr_t base, addr_t top, objid_t id, idmode_e m, idloc_t l);
    cap_t c;
    c.tag = 1; c.base = base; c.top = top; c.cursor = base; c.id = id; c.idmode = m; c.idloc = l;
    return c;
  endfunction

  task automatic op(mop_e o, cap_t c, addr_t off, int sz, logic [63:0] wd,
                    output mresp_t r, output int lat);
    int t0;
    @(negedge clk);
    req.op = o; req.cap = c; req.offset = off; req.size = 2'(sz); req.wdata = wd;
    req_valid = 1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    r = resp;
    lat = cyc - t0;
  endtask

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  localparam addr_t PHYS = 64'h10_0000;

  initial begin
    mresp_t r;
    int lat0, lat, np, nm;
    cap_t kern, inl, inp, alloc;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // memory contents (physical = virtual + 0x100000)
    for (int i = 0; i < 64; i++) mem.poke(PHYS + 64'h1_0040 + addr_t'(i), 8'(i + 8'h40));
    mem.poke(PHYS + 64'h1_005F, 8'd5);              // inline ID, IDLOC 32 in line 0x10040
    for (int i = 0; i < 256; i++) mem.poke(PHYS + 64'h1_0100 + addr_t'(i), 8'(i ^ 8'h5A));
    mem.poke(PHYS + 64'h1_0FFC, 8'd7);              // in-page ID, IDLOC 3 -> 0x10FFC

    kern  = mkcap(64'h1_0000, 64'h1_1000, 8'd0, IDMODE_INLINE, 6'd0);
    inl   = mkcap(64'h1_0040, 64'h1_005F, 8'd5, IDMODE_INLINE, 6'd32);
    inp   = mkcap(64'h1_0100, 64'h1_0200, 8'd7, IDMODE_INPAGE, 6'd3);

    // ---- loads: latency of ID-zero vs inline vs in-page
    op(MOP_LOAD, kern, 64'h48, 3, 0, r, lat0);
    chk(r.exc == EXC_NONE && r.rdata == 64'h4F4E4D4C4B4A4948, "id-zero load data");
    chk(lat0 == MEM_LAT + 3, $sformatf("id-zero load latency %0d", lat0));
    op(MOP_LOAD, inl, 64'h8, 3, 0, r, lat);
    chk(r.exc == EXC_NONE && r.rdata == 64'h4F4E4D4C4B4A4948, "inline load data");
    chk(lat == lat0, $sformatf("inline load latency %0d vs %0d", lat, lat0));
    nm = n_miss;
    op(MOP_LOAD, inp, 64'h10, 2, 0, r, lat);
    chk(r.exc == EXC_NONE && r.rdata == 64'(32'h49484b4a ^ 32'h0), "in-page miss load data");
    chk(n_miss == nm + 1, "in-page first access misses");
    chk(lat == lat0 + MEM_LAT + 2, $sformatf("in-page miss latency %0d vs %0d", lat, lat0));
    op(MOP_LOAD, inp, 64'h20, 1, 0, r, lat);
    chk(r.exc == EXC_NONE && r.rdata == 64'(16'h7b7a), "in-page hit load data");
    chk(lat == lat0, $sformatf("in-page hit latency %0d vs %0d", lat, lat0));
    chk(n_hit >= 1, "buffer hit counted");

    // ---- stale IDs
    op(MOP_LOAD, mkcap(64'h1_0040, 64'h1_005F, 8'd4, IDMODE_INLINE, 6'd32), 64'h0, 0, 0, r, lat);
    chk(r.exc == EXC_ID && r.rdata == 0, "inline stale load -> EXC_ID");
    np = n_push;
    op(MOP_STORE, mkcap(64'h1_0040, 64'h1_005F, 8'd4, IDMODE_INLINE, 6'd32), 64'h10, 2, 64'hCAFEF00D, r, lat);
    chk(r.exc == EXC_NONE, "inline store commits");
    chk(n_push == np + 1 && last_check && last_id == 8'd4 && last_off == 6'd31 &&
           last_addr == PHYS + 64'h1_0050 && last_size == 2'd2 && last_data == 64'hCAFEF00D,
           "inline store handed to guard with check");
    np = n_push;
    op(MOP_STORE, mkcap(64'h1_0100, 64'h1_0200, 8'd6, IDMODE_INPAGE, 6'd3), 64'h0, 3, 64'h1, r, lat);
    chk(r.exc == EXC_ID && n_push == np, "in-page stale store: precise, not committed");
    op(MOP_STORE, inp, 64'h8, 3, 64'h0123456789ABCDEF, r, lat);
    chk(r.exc == EXC_NONE && n_push == np + 1 && !last_check, "in-page store committed unchecked");
    op(MOP_LOAD, inp, 64'h8, 3, 0, r, lat);
    chk(r.rdata == 64'h0123456789ABCDEF, "load after store");

    // ---- ID change is seen after a fence
    mem.poke(PHYS + 64'h1_0FFC, 8'd8);
    op(MOP_LOAD, inp, 64'h0, 0, 0, r, lat);
    chk(r.exc == EXC_NONE, "buffered ID still used before fence");
    nm = n_fence;
    op(MOP_FENCE, kern, 0, 0, 0, r, lat);
    chk(r.exc == EXC_NONE && n_fence == nm + 1, "fence");
    op(MOP_LOAD, inp, 64'h0, 0, 0, r, lat);
    chk(r.exc == EXC_ID, "after fence the new ID faults the old capability");
    op(MOP_LOAD, mkcap(64'h1_0100, 64'h1_0200, 8'd8, IDMODE_INPAGE, 6'd3), 64'h0, 0, 0, r, lat);
    chk(r.exc == EXC_NONE, "new capability accepted");

    // ---- csetmemID / cgetmemID
    alloc = mkcap(64'h1_0040, 64'h1_0080, 8'd0, IDMODE_INLINE, 6'd32);
    alloc.cursor = 64'h1_0040;
    np = n_push;
    op(MOP_SETMEMID, alloc, 0, 0, 64'd6, r, lat);
    chk(r.exc == EXC_NONE && n_push == np + 1 && last_addr == PHYS + 64'h1_005F &&
           last_data[7:0] == 8'd6 && last_size == 0 && !last_check, "csetmemID writes ID byte");
    op(MOP_GETMEMID, inl, 0, 0, 0, r, lat);
    chk(r.exc == EXC_NONE && r.rdata == 64'd6, "cgetmemID inline");
    op(MOP_GETMEMID, mkcap(64'h1_0100, 64'h1_0200, 8'd8, IDMODE_INPAGE, 6'd3), 0, 0, 0, r, lat);
    chk(r.exc == EXC_NONE && r.rdata == 64'd8, "cgetmemID in-page");
    op(MOP_SETMEMID, inl, 0, 0, 64'd9, r, lat);
    chk(r.exc == EXC_ID_PERM, "csetmemID through user capability");
    op(MOP_SETMEMID, mkcap(64'h1_0040, 64'h1_005F, 8'd0, IDMODE_INLINE, 6'd32), 0, 0, 64'd9, r, lat);
    chk(r.exc == EXC_BOUNDS, "csetmemID with ID outside bounds");
    op(MOP_LOAD, inl, 64'h0, 0, 0, r, lat);
    chk(r.exc == EXC_ID, "old inline capability dead after csetmemID");

    // ---- CHERI checks
    kern.tag = 0;
    op(MOP_LOAD, kern, 64'h0, 0, 0, r, lat);
    chk(r.exc == EXC_TAG, "untagged");
    kern.tag = 1;
    op(MOP_LOAD, kern, 64'h3, 2, 0, r, lat);
    chk(r.exc == EXC_ALIGN, "misaligned");
    op(MOP_LOAD, inl, 64'h18, 3, 0, r, lat);
    chk(r.exc == EXC_BOUNDS, "past top (ID byte not reachable)");

    // ---- loads and fences wait for pending stores
    sink_hold = 1;
    nm = n_wait;
    fork
      begin repeat (12) @(posedge clk); sink_hold = 0; end
      op(MOP_LOAD, kern, 64'h48, 3, 0, r, lat);
    join
    chk(n_wait > nm && lat >= lat0 + 6, $sformatf("load waited for stores (%0d vs %0d)", lat, lat0));
    sink_hold = 1;
    fork
      begin repeat (8) @(posedge clk); sink_hold = 0; end
      op(MOP_FENCE, kern, 0, 0, 0, r, lat);
    join
    chk(lat >= 5, $sformatf("fence waited for stores (%0d)", lat));

    // ---- random phase against a byte-level model of one page (VA 0x20000):
    // 32 inline slots (one per line, 40 bytes, IDLOC 41) in the lower half,
    // 15 in-page slots of 128 bytes (IDLOC k+1) above them.  Capabilities
    // carry the current ID or a stale one; in-page ID writes are followed by
    // a fence, as software must do.
    begin
      localparam addr_t PG = 64'h2_0000;
      logic [7:0] model [4096];
      objid_t     id_in [32];
      objid_t     id_pg [15];
      cap_t       c;
      int         kind, slot, o, sz, n_ok = 0, n_fault = 0;
      addr_t      sbase, off;
      objid_t     mid, cid;
      logic [63:0] wd, exp;
      logic       is_st;
      for (int i = 0; i < 4096; i++) begin
        model[i] = 8'($urandom);
        mem.poke(PHYS + PG + addr_t'(i), model[i]);
      end
      for (int k = 0; k < 32; k++) begin
        id_in[k] = 8'($urandom_range(1, 254));
        model[k*64 + 40] = id_in[k];
        mem.poke(PHYS + PG + addr_t'(k*64 + 40), id_in[k]);
      end
      for (int k = 0; k < 15; k++) begin
        id_pg[k] = 8'($urandom_range(1, 254));
        model[4095 - (k+1)] = id_pg[k];
        mem.poke(PHYS + PG + addr_t'(4095 - (k+1)), id_pg[k]);
      end
      op(MOP_FENCE, kern, 0, 0, 0, r, lat);
      for (int n = 0; n < 4000; n++) begin
        kind = $urandom_range(0, 9);
        o    = $urandom_range(0, 99);
        sz   = $urandom_range(0, 3);
        wd   = {$urandom, $urandom};
        if (kind < 2) begin
          // ID-zero access anywhere in the slot data areas
          slot = $urandom_range(0, 46);
          sbase = slot < 32 ? PG + addr_t'(slot*64) : PG + 64'h800 + addr_t'((slot-32)*128);
          off = addr_t'($urandom_range(0, (slot < 32 ? 40 : 128) / (1 << sz) - 1) * (1 << sz));
          c = mkcap(PG, PG + 64'h1000, 8'd0, IDMODE_INLINE, 6'd0);
          c.cursor = sbase;
          mid = 8'd0; cid = 8'd0;
        end else if (kind < 6) begin
          slot = $urandom_range(0, 31);
          sbase = PG + addr_t'(slot*64);
          mid = id_in[slot];
          cid = (o < 70) ? mid : 8'(mid % 254 + 1);
          c = mkcap(sbase, sbase + 40, cid, IDMODE_INLINE, 6'd41);
          off = addr_t'($urandom_range(0, 40 / (1 << sz) - 1) * (1 << sz));
        end else begin
          slot = $urandom_range(0, 14);
          sbase = PG + 64'h800 + addr_t'(slot*128);
          mid = id_pg[slot];
          cid = (o < 70) ? mid : 8'(mid % 254 + 1);
          c = mkcap(sbase, sbase + 128, cid, IDMODE_INPAGE, 6'(slot + 1));
          off = addr_t'($urandom_range(0, 128 / (1 << sz) - 1) * (1 << sz));
        end
        o = $urandom_range(0, 99);
        if (o < 8 && kind >= 2) begin
          // allocator: new memory ID through an ID-zero capability over the slot
          cid = 8'($urandom_range(1, 254));
          c.id = 8'd0;
          c.top = kind < 6 ? sbase + 64 : PG + 64'h1000;
          op(MOP_SETMEMID, c, 0, 0, 64'(cid), r, lat);
          chk(r.exc == EXC_NONE, "random csetmemID");
          if (kind < 6) begin id_in[slot] = cid; model[slot*64 + 40] = cid; end
          else begin id_pg[slot] = cid; model[4095 - (slot+1)] = cid; end
          if (kind >= 6 || o < 4) op(MOP_FENCE, kern, 0, 0, 0, r, lat);
        end else if (o < 12 && kind >= 2) begin
          op(MOP_GETMEMID, c, 0, 0, 0, r, lat);
          chk(r.exc == EXC_NONE && r.rdata == 64'(mid),
              $sformatf("random cgetmemID kind %0d", kind));
        end else begin
          is_st = o < 56;
          op(is_st ? MOP_STORE : MOP_LOAD, c, off, sz, wd, r, lat);
          if (kind >= 6 && cid != mid) begin
            chk(r.exc == EXC_ID && r.rdata == 0, "random in-page stale -> EXC_ID");
            n_fault++;
          end else if (!is_st && kind >= 2 && cid != mid) begin
            chk(r.exc == EXC_ID && r.rdata == 0, "random inline stale load -> EXC_ID");
            n_fault++;
          end else if (is_st) begin
            chk(r.exc == EXC_NONE, "random store commits");
            if (cid == mid)
              for (int b = 0; b < (1 << sz); b++) model[c.cursor - PG + off + addr_t'(b)] = wd[b*8 +: 8];
            n_ok++;
          end else begin
            exp = '0;
            for (int b = 0; b < (1 << sz); b++) exp[b*8 +: 8] = model[c.cursor - PG + off + addr_t'(b)];
            chk(r.exc == EXC_NONE && r.rdata == exp,
                $sformatf("random load kind %0d size %0d: %h vs %h", kind, sz, r.rdata, exp));
            n_ok++;
          end
        end
      end
      // the page must end up exactly as the model says
      for (int i = 0; i < 4096; i++)
        chk(mem.peek(PHYS + PG + addr_t'(i)) == model[i], $sformatf("final page byte %0d", i));
      chk(n_fault > 200 && n_ok > 1000, $sformatf("random mix: %0d faults, %0d ok", n_fault, n_ok));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
