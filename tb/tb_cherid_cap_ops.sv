// tb_cherid_cap_ops -- self-checking test of the capability-field instructions.
//
// Walks the allocator sequence the ID scheme expects (privileged capability
// with ID zero -> csetIDloc -> csetcapID) and checks each guarded-manipulation
// rule: changes through a non-zero-ID capability clear the tag, an IDLOC that
// puts the ID outside the source bounds clears the tag, a non-zero ID with a
// zero IDLOC clears the tag, unprivileged csetIDloc faults, and the get
// instructions return the fields. Random cases are compared with a reference
// model written here from the rules.
module tb_cherid_cap_ops;
  import cherid_pkg::*;

  capop_e      op;
  cap_t        cin, cout;
  logic [63:0] operand, iout;
  logic        priv, pfault;
  int          checks = 0, failures = 0;

  cherid_cap_ops dut (.op(op), .cap_in(cin), .operand(operand), .priv(priv),
                      .cap_out(cout), .int_out(iout), .priv_fault(pfault));

  function automatic cap_t mkcap(addr_t base, addr_t top, objid_t id, idmode_e m, idloc_t l);
    cap_t c;
    c.tag = 1'b1; c.base = base; c.top = top; c.cursor = base;
    c.id = id; c.idmode = m; c.idloc = l;
    return c;
  endfunction

  task automatic run(capop_e o, cap_t c, logic [63:0] opd, logic p);
    op = o; cin = c; operand = opd; priv = p;
    #1;
  endtask

  task automatic expect_cap(string what, cap_t exp, logic exp_fault);
    checks++;
    if (cout !== exp || pfault !== exp_fault) begin
      failures++;
      $display("FAIL %s: got tag=%b id=%0d mode=%0d loc=%0d fault=%b exp tag=%b id=%0d mode=%0d loc=%0d fault=%b",
               what, cout.tag, cout.id, cout.idmode, cout.idloc, pfault,
               exp.tag, exp.id, exp.idmode, exp.idloc, exp_fault);
    end
  endtask

  task automatic expect_int(string what, logic [63:0] exp);
    checks++;
    if (iout !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, iout, exp);
    end
  endtask

  // reference model of the rules
  function automatic cap_t ref_set(capop_e o, cap_t c, logic [63:0] opd, logic p, output logic f);
    cap_t r = c;
    longint unsigned ida;
    f = 1'b0;
    if (o == CAPOP_SETCAPID) begin
      r.id = opd[7:0];
      if (c.id != 0) r.tag = 0;
      if (opd[7:0] != 0 && c.idloc == 0) r.tag = 0;
    end else if (o == CAPOP_SETIDLOC) begin
      if (!p) begin
        f = 1'b1;
      end else begin
        r.idmode = idmode_e'(opd[6]);
        r.idloc  = opd[5:0];
        if (c.id != 0) r.tag = 0;
        if (opd[5:0] != 0) begin
          if (opd[6] == 1'b0) ida = (c.base / 64) * 64 + opd[5:0] - 1;
          else                ida = (c.base / 4096) * 4096 + 4095 - opd[5:0];
          if (!(ida >= c.base && ida < c.top)) r.tag = 0;
        end
      end
    end
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cap_t a, e;
    logic f;
    // allocator capability over a 32-byte slot at line offset 0x20
    a = mkcap(64'h1_0020, 64'h1_0040, 8'd0, IDMODE_INLINE, 6'd0);
    // csetIDloc inline, IDLOC = 0x20 + 32 = 64 does not fit; use a 31-byte user
    // region and IDLOC 63 -> ID byte 0x1_003E, inside the allocator's bounds
    run(CAPOP_SETIDLOC, a, {57'd0, 1'b0, 6'd63}, 1'b1);
    e = a; e.idloc = 6'd63;
    expect_cap("setidloc ok", e, 1'b0);
    a = cout;
    // csetcapID on ID-zero capability with IDLOC set
    run(CAPOP_SETCAPID, a, 64'd7, 1'b1);
    e = a; e.id = 8'd7;
    expect_cap("setcapid ok", e, 1'b0);
    a = cout;
    // get instructions
    run(CAPOP_GETCAPID, a, 64'd0, 1'b0);
    expect_int("getcapid", 64'd7);
    run(CAPOP_GETIDLOC, a, 64'd0, 1'b0);
    expect_int("getidloc", 64'd63);
    // user capability (ID != 0) may not change its ID
    run(CAPOP_SETCAPID, a, 64'd0, 1'b1);
    e = a; e.id = 8'd0; e.tag = 1'b0;
    expect_cap("setcapid on nonzero id", e, 1'b0);
    // nor its IDLOC
    run(CAPOP_SETIDLOC, a, {57'd0, 1'b1, 6'd5}, 1'b1);
    e = a; e.idmode = IDMODE_INPAGE; e.idloc = 6'd5; e.tag = 1'b0;
    expect_cap("setidloc on nonzero id", e, 1'b0);
    // ID location outside the source bounds
    a = mkcap(64'h2_0000, 64'h2_0010, 8'd0, IDMODE_INLINE, 6'd0);
    run(CAPOP_SETIDLOC, a, {57'd0, 1'b0, 6'd20}, 1'b1);
    e = a; e.idloc = 6'd20; e.tag = 1'b0;
    expect_cap("idloc out of bounds", e, 1'b0);
    // non-zero ID with zero IDLOC
    run(CAPOP_SETCAPID, a, 64'd3, 1'b1);
    e = a; e.id = 8'd3; e.tag = 1'b0;
    expect_cap("id without idloc", e, 1'b0);
    // unprivileged csetIDloc
    run(CAPOP_SETIDLOC, a, {57'd0, 1'b0, 6'd4}, 1'b0);
    expect_cap("unprivileged setidloc", a, 1'b1);
    // in-page: page-sized allocator capability reaches the ID table
    a = mkcap(64'h5_3000, 64'h5_4000, 8'd0, IDMODE_INLINE, 6'd0);
    run(CAPOP_SETIDLOC, a, {57'd0, 1'b1, 6'd9}, 1'b1);
    e = a; e.idmode = IDMODE_INPAGE; e.idloc = 6'd9;
    expect_cap("inpage setidloc", e, 1'b0);
    // random cases against the reference model
    for (int i = 0; i < 3000; i++) begin
      capop_e o;
      cap_t c;
      logic [63:0] opd;
      logic p;
      addr_t b;
      o = capop_e'($urandom_range(0, 3));
      b = {44'd0, 20'($urandom)};
      c = mkcap(b, b + addr_t'($urandom_range(1, 8192)),
                ($urandom_range(0, 3) == 0) ? 8'($urandom) : 8'd0,
                idmode_e'($urandom_range(0, 1)), 6'($urandom));
      opd = {$urandom, $urandom};
      p = 1'($urandom);
      run(o, c, opd, p);
      if (o == CAPOP_GETCAPID)      expect_int("rand getcapid", 64'(c.id));
      else if (o == CAPOP_GETIDLOC) expect_int("rand getidloc", 64'({c.idmode, c.idloc}));
      else begin
        e = ref_set(o, c, opd, p, f);
        expect_cap("rand set", e, f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
