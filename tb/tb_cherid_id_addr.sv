// tb_cherid_id_addr -- self-checking test of the object-ID address generator.
//
// Checks the inline formula (line base + IDLOC - 1) and the in-page formula
// (page base + 4096 - IDLOC - 1) against a reference computed with integer
// division, for directed cases (an allocator slot at the end of a 32-byte
// sub-line slot, the first and last entry of a page's ID table) and for random
// addresses, modes and IDLOC values. id_valid must follow IDLOC != 0.
module tb_cherid_id_addr;
  import cherid_pkg::*;

  addr_t   addr, id_addr;
  idmode_e mode;
  idloc_t  loc;
  logic    id_valid;
  int      checks = 0, failures = 0;

  cherid_id_addr dut (.addr(addr), .idmode(mode), .idloc(loc), .id_addr(id_addr), .id_valid(id_valid));

  function automatic addr_t ref_addr(addr_t a, idmode_e m, idloc_t l);
    longint unsigned line = (a / 64) * 64;
    longint unsigned page = (a / 4096) * 4096;
    if (m == IDMODE_INLINE) return addr_t'(line + longint'(l) - 1);
    return addr_t'(page + 4096 - longint'(l) - 1);
  endfunction

  task automatic check(addr_t a, idmode_e m, idloc_t l, addr_t expect_addr);
    addr = a; mode = m; loc = l;
    #1;
    checks++;
    if (id_addr !== expect_addr || id_valid !== (l != 0)) begin
      failures++;
      $display("FAIL addr=%h mode=%0d loc=%0d got=%h exp=%h valid=%b", a, m, l, id_addr, expect_addr, id_valid);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // slot of 32 bytes at line offset 0x10: IDLOC = 0x10 + 32 = 48 -> byte 0x2F
    check(64'h0000_0000_0001_1018, IDMODE_INLINE, 6'd48, 64'h0000_0000_0001_102F);
    // slot covering a whole 63-byte line head: IDLOC 63 -> byte 62
    check(64'h0000_7fff_0000_0040, IDMODE_INLINE, 6'd63, 64'h0000_7fff_0000_007E);
    // first in-page table entry is the last byte of the page
    check(64'h0000_0000_0003_4567, IDMODE_INPAGE, 6'd0,  64'h0000_0000_0003_4FFF);
    check(64'h0000_0000_0003_4567, IDMODE_INPAGE, 6'd1,  64'h0000_0000_0003_4FFE);
    check(64'h0000_0000_0003_4567, IDMODE_INPAGE, 6'd63, 64'h0000_0000_0003_4FC0);
    for (int i = 0; i < 2000; i++) begin
      addr_t a;
      idmode_e m;
      idloc_t l;
      a = {$urandom, $urandom};
      m = idmode_e'($urandom_range(0, 1));
      l = idloc_t'($urandom_range(0, 63));
      check(a, m, l, ref_addr(a, m, l));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
