// cherid_cap_ops -- execute unit for the CHERI-D capability-field instructions.
//
// Implements csetcapID, cgetcapID, csetIDloc and cgetIDloc with the paper's
// guarded-manipulation rules:
//   * a capability whose ID is non-zero may not have ID, IDMODE or IDLOC
//     changed: any attempt returns the capability with its tag cleared;
//   * with ID zero, an IDLOC set to a non-zero value must place the ID byte
//     inside the bounds of the source capability, else the tag is cleared;
//   * a result with a non-zero ID must have a non-zero IDLOC, else the tag is
//     cleared;
//   * csetIDloc is privileged.
// Reading the fields needs no authority. Choices of this design: csetIDloc
// takes its operand as {IDMODE, IDLOC} in bits [6:0]; csetcapID takes the
// ID in bits [7:0]; the ID location for the bounds rule is computed from the
// capability base (the region named by IDMODE encloses the bounds, so any
// in-bounds address gives the same result); an unprivileged csetIDloc raises
// priv_fault and returns the source capability unchanged. Combinational.
// The bounds and cursor of cap_out are those of cap_in: these instructions
// never change them, so those output bits are wired straight through.
module cherid_cap_ops
  import cherid_pkg::*;
(
  input  capop_e      op,
  input  cap_t        cap_in,
  input  logic [63:0] operand,
  input  logic        priv,        // executing in privileged mode
  output cap_t        cap_out,     // result capability (set operations)
  output logic [63:0] int_out,     // result integer (get operations)
  output logic        priv_fault   // unprivileged csetIDloc
);

  idmode_e new_mode;
  idloc_t  new_loc;
  addr_t   new_id_addr;
  logic    new_id_valid;

  assign new_mode = idmode_e'(operand[IDLOC_W]);
  assign new_loc  = operand[IDLOC_W-1:0];

  cherid_id_addr u_loc (
    .addr    (cap_in.base),
    .idmode  (new_mode),
    .idloc   (new_loc),
    .id_addr (new_id_addr),
    .id_valid(new_id_valid)
  );

  always_comb begin
    cap_out    = cap_in;
    int_out    = '0;
    priv_fault = 1'b0;
    unique case (op)
      CAPOP_GETCAPID: int_out = 64'(cap_in.id);
      CAPOP_GETIDLOC: int_out = 64'({cap_in.idmode, cap_in.idloc});
      CAPOP_SETCAPID: begin
        cap_out.id = operand[ID_W-1:0];
        if (cap_in.id != ID_NONE) cap_out.tag = 1'b0;
        if (cap_out.id != ID_NONE && cap_in.idloc == '0) cap_out.tag = 1'b0;
      end
      CAPOP_SETIDLOC: begin
        if (!priv) begin
          priv_fault = 1'b1;
        end else begin
          cap_out.idmode = new_mode;
          cap_out.idloc  = new_loc;
          if (cap_in.id != ID_NONE) cap_out.tag = 1'b0;
          if (new_id_valid && !(new_id_addr >= cap_in.base && new_id_addr < cap_in.top))
            cap_out.tag = 1'b0;
        end
      end
      default: ;
    endcase
  end

endmodule
