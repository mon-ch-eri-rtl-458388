// pcc_opbound_check: dedicated check of an instruction fetch against the
// program-counter capability (PCC), including its operation bound.
//
// The conventional part requires a valid, unsealed PCC with the Execute
// permission and the instruction [pc, pc+ilen) inside [base, top). The
// conditional part applies the Execute rule of the PCC's conditional
// permission: Write-before-Execute and Write-before-Execute-Only require the
// instruction to lie below the operation top; Execute-Once requires it to lie
// at or above the operation top and, when the fetch reaches the operation top,
// returns the extended bound and an updated PCC for the pipeline to keep.
// The PCC is decoded here (it has its own decoder, separate from the data
// path). Purely combinational.
module pcc_opbound_check
  import moncheri_pkg::*;
(
  input  tcap_t       pcc,
  input  logic [63:0] pc,
  input  logic [3:0]  ilen,       // 2 or 4 bytes
  output logic        fault,
  output cause_e      cause,
  output logic        update,
  output tcap_t       pcc_next    // PCC with extended operation bound (valid when update)
);

  bounds_t     bnd;
  logic        cc_fault, cc_upd, cv_fault;
  cause_e      cv_cause;
  logic [64:0] new_optop;
  cap_t        enc;

  cap_decode u_dec (.cap(pcc.cap), .bnd(bnd));

  cap_check u_cv (
    .cap(pcc), .bnd(bnd), .addr(pc), .size(ilen), .acc(ACC_EXEC),
    .fault(cv_fault), .cause(cv_cause)
  );

  opbound_check u_ob (
    .p_op(pcc.cap.p_op), .bnd(bnd), .addr(pc), .size(ilen), .acc(ACC_EXEC),
    .fault(cc_fault), .update(cc_upd), .new_optop(new_optop)
  );

  opbound_encode u_enc (.cap_in(pcc.cap), .new_optop(new_optop), .cap_out(enc));

  always_comb begin
    fault    = cv_fault || cc_fault;
    cause    = cv_fault ? cv_cause : (cc_fault ? CAUSE_OPBOUND : CAUSE_NONE);
    update   = cc_upd && !cv_fault;
    pcc_next = '{tag: pcc.tag, cap: enc};
  end

endmodule
