// tb_cherid_id_buffer -- self-checking test of the in-page ID buffer.
//
// Checks at the default size (64 entries, 4 ways, 16 IDs per entry): a fill
// makes all 16 IDs of the chunk hit with their values; chunks of other
// addresses miss; the four table chunks of one page and the tables of
// neighbouring pages coexist; a fifth chunk mapping to a full set evicts the
// oldest (round-robin); refilling a present chunk updates it in place; a flush
// (fence) makes everything miss. A random phase compares hits and IDs with a
// reference model kept in the testbench (per-set FIFO order of insertion).
module tb_cherid_id_buffer;
  import cherid_pkg::*;

  logic   clk = 0, rst_n = 0;
  addr_t  lk_addr, fill_addr;
  logic   lk_hit, fill_valid = 0, flush = 0;
  objid_t lk_id;
  logic [127:0] fill_data;
  int checks = 0, failures = 0;

  cherid_id_buffer dut (.clk(clk), .rst_n(rst_n), .lk_addr(lk_addr), .lk_hit(lk_hit), .lk_id(lk_id),
                        .fill_valid(fill_valid), .fill_addr(fill_addr), .fill_data(fill_data), .flush(flush));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // address of ID table byte `idx` (0..63 from the table base) in page `pg`
  function automatic addr_t tbl(longint unsigned pg, int idx);
    return addr_t'(pg * 4096 + 4096 - 64 + idx);
  endfunction

  function automatic logic [127:0] pattern(addr_t chunk_base, int salt);
    logic [127:0] d;
    for (int i = 0; i < 16; i++) d[i*8 +: 8] = 8'((chunk_base + addr_t'(i)) * 7 + addr_t'(salt));
    return d;
  endfunction

  task automatic fill(addr_t a, logic [127:0] d);
    @(negedge clk);
    fill_addr = a; fill_data = d; fill_valid = 1;
    @(negedge clk);
    fill_valid = 0;
  endtask

  task automatic do_flush();
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
  endtask

  task automatic look(addr_t a, logic exp_hit, objid_t exp_id, string what);
    lk_addr = a; #1;
    checks++;
    if (lk_hit !== exp_hit || (exp_hit && lk_id !== exp_id)) begin
      failures++;
      $display("FAIL %s addr=%h hit=%b id=%h exp hit=%b id=%h", what, a, lk_hit, lk_id, exp_hit, exp_id);
    end
  endtask

  // reference model
  typedef struct { logic v; addr_t tag; logic [127:0] d; } ent_t;
  ent_t m [16][4];
  int   m_rr [16];

  function automatic int set_of(addr_t a);
    return int'({a[13:12], a[5:4]});
  endfunction

  task automatic m_fill(addr_t a, logic [127:0] d);
    int s = set_of(a);
    int w = -1;
    for (int i = 0; i < 4; i++) if (m[s][i].v && m[s][i].tag == (a >> 4)) w = i;
    if (w < 0) begin w = m_rr[s]; m_rr[s] = (m_rr[s] + 1) % 4; end
    m[s][w].v = 1; m[s][w].tag = a >> 4; m[s][w].d = d;
  endtask

  task automatic m_look(addr_t a, output logic h, output objid_t id);
    int s = set_of(a);
    h = 0; id = 0;
    for (int i = 0; i < 4; i++)
      if (m[s][i].v && m[s][i].tag == (a >> 4)) begin h = 1; id = m[s][i].d[int'(a[3:0])*8 +: 8]; end
  endtask

  initial begin
    addr_t a;
    int r;
    logic [127:0] d;
    lk_addr = 0; fill_addr = 0; fill_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // empty buffer misses
    look(tbl(5, 0), 0, 0, "empty");
    // one chunk: all its 16 IDs hit
    a = tbl(5, 16);
    d = pattern(a, 1);
    fill(a, d);
    for (int i = 0; i < 16; i++) look(a + addr_t'(i), 1, d[i*8 +: 8], "chunk byte");
    look(tbl(5, 0), 0, 0, "other chunk same page");
    look(tbl(6, 16), 0, 0, "same chunk other page");
    // all four chunks of pages 8..11 (16 distinct sets) fit together
    for (int p = 8; p < 12; p++)
      for (int c = 0; c < 4; c++) fill(tbl(p, c * 16), pattern(tbl(p, c * 16), 2));
    for (int p = 8; p < 12; p++)
      for (int c = 0; c < 4; c++) look(tbl(p, c * 16 + 3), 1, pattern(tbl(p, c * 16), 2)[3*8 +: 8], "16 sets");
    // round-robin eviction: pages 16,20,24,28,32 map to the same sets as page 0
    do_flush();
    for (int k = 0; k < 5; k++) fill(tbl(16 + 4 * k, 0), pattern(tbl(16 + 4 * k, 0), 3));
    look(tbl(16, 0), 0, 0, "evicted oldest");
    for (int k = 1; k < 5; k++) look(tbl(16 + 4 * k, 0), 1, pattern(tbl(16 + 4 * k, 0), 3)[7:0], "kept");
    // refill present chunk updates in place, no eviction
    fill(tbl(20, 0), pattern(tbl(20, 0), 9));
    look(tbl(20, 0), 1, pattern(tbl(20, 0), 9)[7:0], "refill in place");
    look(tbl(24, 0), 1, pattern(tbl(24, 0), 3)[7:0], "refill evicted nothing");
    // fence flush
    do_flush();
    for (int k = 1; k < 5; k++) look(tbl(16 + 4 * k, 0), 0, 0, "after flush");
    // random phase against the model
    for (int s = 0; s < 16; s++) begin m_rr[s] = 0; for (int w = 0; w < 4; w++) m[s][w].v = 0; end
    for (int i = 0; i < 3000; i++) begin
      r = $urandom_range(0, 99);
      a = tbl($urandom_range(0, 31), $urandom_range(0, 63));
      if (r < 40) begin
        d = {$urandom, $urandom, $urandom, $urandom};
        fill(a, d);
        m_fill(a, d);
      end else if (r < 42) begin
        do_flush();
        for (int s = 0; s < 16; s++) for (int w = 0; w < 4; w++) m[s][w].v = 0;
      end else begin
        logic h; objid_t id;
        m_look(a, h, id);
        look(a, h, id, "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
