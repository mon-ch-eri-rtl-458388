// csetopbounds_unit: executes the CSetOpBounds instruction family.
//
// Operands are a capability cs1 and an integer length. The result is cs1 with
// its conditional-permission field set to the instruction's variant and its
// operation bound set to [base, base + length]: the new operation top is
// encoded into the cursor's top 16 bits by opbound_encode, which turns cs1
// into a conditional capability whose address is cursor[47:0].
// Checks, in order (the first one that fails raises the exception):
//   - cs1 untagged                                  -> tag violation
//   - cs1 sealed                                    -> seal violation
//   - IE = 1 with exponent above 2, or cs1 not a CC and its address or
//     top beyond the 48-bit space                   -> length violation
//   - base + length above top                       -> length violation
//   - cs1 already a CC of another variant, or base + length above its
//     current operation top (bounds only shrink)    -> operation-bound violation
// Faulting instructions leave their result undefined. Purely combinational.
module csetopbounds_unit
  import moncheri_pkg::*;
(
  input  tcap_t       cs1,
  input  logic [63:0] len,
  input  cp_e         variant,
  output tcap_t       cd,
  output logic        fault,
  output cause_e      cause
);

  bounds_t     bnd;
  logic [64:0] new_optop;
  cap_t        with_op, enc;

  cap_decode u_dec (.cap(cs1.cap), .bnd(bnd));

  always_comb begin
    new_optop  = {1'b0, bnd.base} + {1'b0, len};
    with_op    = cs1.cap;
    with_op.p_op = variant;
    if (!bnd.cc) with_op.cursor[63:48] = '0;
  end

  opbound_encode u_enc (.cap_in(with_op), .new_optop(new_optop), .cap_out(enc));

  always_comb begin
    cd    = '{tag: cs1.tag, cap: enc};
    fault = 1'b1;
    if (!cs1.tag)                                         cause = CAUSE_TAG;
    else if (cs1.cap.otype != OTYPE_UNSEALED)             cause = CAUSE_SEAL;
    else if (cs1.cap.ie && bnd.e > 6'(CC_MAX_E))          cause = CAUSE_LENGTH;
    else if (!bnd.cc && (cs1.cap.cursor[63:48] != '0 ||
                         bnd.top > 65'h1_0000_0000_0000)) cause = CAUSE_LENGTH;
    else if (new_optop > bnd.top || len[63])              cause = CAUSE_LENGTH;
    else if (bnd.cc && (cs1.cap.p_op != variant ||
                        new_optop > bnd.optop))           cause = CAUSE_OPBOUND;
    else begin
      fault = 1'b0;
      cause = CAUSE_NONE;
    end
  end

endmodule
