// opbound_check: first-stage operation-bound check of one data access.
//
// For a conditional capability the conditional permission p_op selects, per
// access kind (load or store), a rule from moncheri_pkg::cp_rule:
//   need_in  - the whole access must lie in [base, optop), i.e. the memory has
//              already been the subject of the conditioning operation
//              (a load under Write-before-Read);
//   need_out - the access must start at or above optop, i.e. the memory has not
//              yet been the subject of it (a second store under Write-Once);
//   update   - an access that covers optop (start <= optop < end) extends the
//              operation bound to its end; the second stage re-encodes the
//              capability and the writeback stage commits it.
// Stores that start above optop are allowed by Write-before-Read but do not
// move the bound: the bound tracks memory written sequentially from the base.
// A conditional capability whose exponent cannot hold an operation top faults
// on every access that its permission conditions. Capabilities with p_op = 0
// are never affected. Conventional bounds and permissions are checked in
// parallel by cap_check; both must pass. Purely combinational.
module opbound_check
  import moncheri_pkg::*;
(
  input  cp_e         p_op,
  input  bounds_t     bnd,
  input  logic [63:0] addr,       // effective address of the access
  input  logic [3:0]  size,       // access size in bytes
  input  acc_e        acc,
  output logic        fault,
  output logic        update,
  output logic [64:0] new_optop
);

  cp_rule_t    rule;
  logic [64:0] a_start, a_end;
  logic        is_in, is_out, covers;

  always_comb begin
    rule      = cp_rule(p_op, acc);
    a_start   = {1'b0, addr};
    a_end     = a_start + 65'(size);
    is_in     = (a_start >= {1'b0, bnd.base}) && (a_end <= bnd.optop);
    is_out    = (a_start >= bnd.optop);
    covers    = (a_start <= bnd.optop) && (a_end > bnd.optop);
    fault     = bnd.cc && ((rule.need_in && !is_in) || (rule.need_out && !is_out) ||
                           ((rule.need_in || rule.need_out || rule.update) && !bnd.op_ok));
    update    = bnd.cc && rule.update && covers && !fault;
    new_optop = a_end;
  end

endmodule
