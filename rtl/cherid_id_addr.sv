// cherid_id_addr -- object-ID address generator.
//
// Given a data address, the IDMODE and the IDLOC of a capability, returns the
// address of the byte that holds the allocation's object ID:
//   inline  mode: ID address = line base + IDLOC - 1          (64-byte line)
//   in-page mode: ID address = page base + 4096 - IDLOC - 1   (4 KiB page)
// Both formulas are the paper's. In-page IDs therefore always lie in the top
// 64 bytes of the page, so one line holds a page's whole ID table. An IDLOC of
// zero names no ID byte; id_valid is then low (the paper requires IDLOC to be
// non-zero whenever the capability ID is non-zero). Purely combinational, used
// on virtual addresses (ID buffer lookup, bounds rule of csetIDloc) and on
// physical addresses (the page offset is the same, so the ID stays in the page).
module cherid_id_addr
  import cherid_pkg::*;
(
  input  addr_t   addr,
  input  idmode_e idmode,
  input  idloc_t  idloc,
  output addr_t   id_addr,      // byte address of the object ID
  output logic    id_valid      // IDLOC != 0
);

  addr_t line_base, page_base;

  always_comb begin
    line_base = {addr[XLEN-1:LINE_OFF_W], {LINE_OFF_W{1'b0}}};
    page_base = {addr[XLEN-1:PAGE_OFF_W], {PAGE_OFF_W{1'b0}}};
    if (idmode == IDMODE_INLINE)
      id_addr = line_base + addr_t'(idloc) - addr_t'(1);
    else
      id_addr = page_base + addr_t'(PAGE_BYTES) - addr_t'(idloc) - addr_t'(1);
    id_valid = (idloc != '0);
  end

endmodule
