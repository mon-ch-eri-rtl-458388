// cap_check: conventional CHERI check of a data access, run in parallel with
// the operation-bound check (the access is allowed only if both pass).
//
// In CHERI ISAv9 priority order it reports a tag violation, a seal violation
// (object type other than unsealed), a missing Load or Store permission, and
// an access [addr, addr+size) that is not inside [base, top). The decoded
// bounds come from cap_decode. Purely combinational.
module cap_check
  import moncheri_pkg::*;
(
  input  tcap_t       cap,
  input  bounds_t     bnd,
  input  logic [63:0] addr,
  input  logic [3:0]  size,
  input  acc_e        acc,
  output logic        fault,
  output cause_e      cause
);

  logic [64:0] a_end;

  always_comb begin
    a_end = {1'b0, addr} + 65'(size);
    fault = 1'b1;
    if (!cap.tag)                                            cause = CAUSE_TAG;
    else if (cap.cap.otype != OTYPE_UNSEALED)                cause = CAUSE_SEAL;
    else if (acc == ACC_LOAD  && !cap.cap.p_hw[PERM_LOAD])   cause = CAUSE_PERM_LOAD;
    else if (acc == ACC_STORE && !cap.cap.p_hw[PERM_STORE])  cause = CAUSE_PERM_STORE;
    else if (acc == ACC_EXEC  && !cap.cap.p_hw[PERM_EXECUTE]) cause = CAUSE_PERM_EXEC;
    else if (addr < bnd.base || a_end > bnd.top)            cause = CAUSE_LENGTH;
    else begin
      fault = 1'b0;
      cause = CAUSE_NONE;
    end
  end

endmodule
