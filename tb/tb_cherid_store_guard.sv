// tb_cherid_store_guard -- self-checking test of the committed-store queue.
//
// Pushes stores of all sizes with and without the inline-ID check into the
// guard, in front of a behavioural line memory whose ID bytes the testbench
// sets. Checks: stores without check are written; checked stores whose ID byte
// matches are written; checked stores whose ID byte differs are dropped and
// counted as cancels; stores reach memory in order (a later store to the same
// bytes wins); push_ready drops when the queue is full; empty returns when
// all is drained. A checked store costs one read and one write transaction, a
// cancelled one a read only.
module tb_cherid_store_guard;
  import cherid_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push = 0, push_ready, st_check;
  addr_t st_addr;
  logic [1:0] st_size;
  logic [63:0] st_data;
  objid_t st_cap_id;
  logic [5:0] st_id_off;
  logic mv, mr, rv, empty, cancel, written;
  lreq_t mreq;
  line_t rdata;
  int checks = 0, failures = 0, cancels = 0, writes = 0, full_seen = 0;

  cherid_store_guard dut (.clk(clk), .rst_n(rst_n), .push(push), .push_ready(push_ready),
    .st_addr(st_addr), .st_size(st_size), .st_data(st_data), .st_check(st_check),
    .st_cap_id(st_cap_id), .st_id_off(st_id_off), .mem_req_valid(mv), .mem_req_ready(mr),
    .mem_req(mreq), .mem_resp_valid(rv), .mem_resp_rdata(rdata), .empty(empty),
    .cancel(cancel), .written(written));

  tb_line_mem #(.LATENCY(2)) mem (.clk(clk), .rst_n(rst_n), .req_valid(mv), .req_ready(mr),
    .req(mreq), .resp_valid(rv), .resp_rdata(rdata));

  always @(posedge clk) begin
    if (cancel) cancels++;
    if (written) writes++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push_st(addr_t a, int sz, logic [63:0] d, logic chk, objid_t id, int idoff);
    @(negedge clk);
    st_addr = a; st_size = 2'(sz); st_data = d; st_check = chk; st_cap_id = id; st_id_off = 6'(idoff);
    push = 1;
    if (!push_ready) full_seen++;
    while (!push_ready) @(negedge clk);
    @(negedge clk);
    push = 0;
  endtask

  task automatic drain();
    @(negedge clk);
    while (!empty) @(negedge clk);
  endtask

  task automatic expect_bytes(addr_t a, int n, logic [63:0] d, string what);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (mem.peek(a + addr_t'(i)) !== d[i*8 +: 8]) begin
        failures++;
        $display("FAIL %s byte %0d of %h: got %h exp %h", what, i, a, mem.peek(a + addr_t'(i)), d[i*8 +: 8]);
      end
    end
  endtask

  task automatic expect_int(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int t0, r0, w0;
    logic [63:0] ref_line [8];
    st_addr = 0; st_size = 0; st_data = 0; st_check = 0; st_cap_id = 0; st_id_off = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // slot at line 0x1000, ID byte at offset 47 holds ID 5
    mem.poke(64'h102F, 8'd5);
    // unchecked stores of every size
    push_st(64'h2000, 0, 64'hA1, 0, 0, 0);
    push_st(64'h2002, 1, 64'hB2B1, 0, 0, 0);
    push_st(64'h2004, 2, 64'hC4C3C2C1, 0, 0, 0);
    push_st(64'h2008, 3, 64'hD8D7D6D5D4D3D2D1, 0, 0, 0);
    drain();
    expect_bytes(64'h2000, 1, 64'hA1, "byte");
    expect_bytes(64'h2002, 2, 64'hB2B1, "half");
    expect_bytes(64'h2004, 4, 64'hC4C3C2C1, "word");
    expect_bytes(64'h2008, 8, 64'hD8D7D6D5D4D3D2D1, "dword");
    expect_bytes(64'h2001, 1, 64'h00, "untouched");
    expect_int(writes, 4, "written count");
    // checked store, matching ID: one read and one write
    r0 = mem.n_reads; w0 = mem.n_writes;
    push_st(64'h1010, 3, 64'h1122334455667788, 1, 8'd5, 47);
    drain();
    expect_bytes(64'h1010, 8, 64'h1122334455667788, "checked ok");
    expect_int(mem.n_reads - r0, 1, "checked ok reads");
    expect_int(mem.n_writes - w0, 1, "checked ok writes");
    // checked store, stale ID 4: cancelled, memory unchanged, no write
    r0 = mem.n_reads; w0 = mem.n_writes;
    push_st(64'h1018, 3, 64'hDEADBEEFDEADBEEF, 1, 8'd4, 47);
    drain();
    expect_bytes(64'h1018, 8, 64'h0, "cancelled");
    expect_int(cancels, 1, "cancel count");
    expect_int(mem.n_writes - w0, 0, "cancelled writes");
    // quarantined slot (memory ID 255) cancels too
    mem.poke(64'h102F, 8'd255);
    push_st(64'h1010, 0, 64'hEE, 1, 8'd5, 47);
    drain();
    expect_bytes(64'h1010, 1, 64'h88, "quarantined");
    expect_int(cancels, 2, "cancel count 2");
    // queue fills up (memory is slower than pushes) and keeps order
    for (int i = 0; i < 8; i++) push_st(64'h3000, 3, 64'(i + 1), 0, 0, 0);
    drain();
    expect_bytes(64'h3000, 8, 64'd8, "in-order last wins");
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL queue never full"); end
    // random mix against a reference line image
    for (int i = 0; i < 8; i++) ref_line[i] = 0;
    mem.poke(64'h403F, 8'd9);   // ID of line 0x4000 at offset 63
    for (int i = 0; i < 300; i++) begin
      int sz, off, id;
      logic chk;
      logic [63:0] d;
      sz  = $urandom_range(0, 3);
      off = $urandom_range(0, 7 - ((1 << sz) - 1)) & ~((1 << sz) - 1);
      off = off + 8 * $urandom_range(0, 6);   // keep clear of the ID byte
      d   = {$urandom, $urandom};
      chk = 1'($urandom);
      id  = ($urandom_range(0, 3) == 0) ? 8 : 9;
      push_st(64'h4000 + addr_t'(off), sz, d, chk, 8'(id), 63);
      if (!chk || id == 9)
        for (int b = 0; b < (1 << sz); b++) ref_line[(off + b) / 8][((off + b) % 8) * 8 +: 8] = d[b*8 +: 8];
    end
    drain();
    for (int i = 0; i < 7; i++) expect_bytes(64'h4000 + addr_t'(8 * i), 8, ref_line[i], "random");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
