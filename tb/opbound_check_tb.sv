// opbound_check_tb: drives random loads and stores near the operation top of
// each conditional permission and compares fault / update / new bound with a
// reference written from the published table of pipeline changes:
//   Write-before-Read(-Only)   load must lie below the operation top
//   *-Only and Write-Once      store must start at or above it
//   Read-Once                  load must start at or above it
//   every store of the write conditions, and Read-Once loads and stores,
//   extend the bound when they reach it.
// Execute conditions leave data accesses alone.
module opbound_check_tb;
  import moncheri_pkg::*;

  cp_e         p_op;
  bounds_t     bnd;
  logic [63:0] addr;
  logic [3:0]  size;
  acc_e        acc;
  logic        fault, update;
  logic [64:0] new_optop;
  int checks = 0, failures = 0;
  int n_fault = 0, n_upd = 0;

  opbound_check dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic e_fault, e_upd, below, above, reach;
    logic [64:0] a0, a1;
    for (int i = 0; i < 20000; i++) begin
      p_op = cp_e'($urandom_range(7, 0));
      acc  = $urandom_range(1, 0) ? ACC_STORE : ACC_LOAD;
      size = 4'(1 << $urandom_range(3, 0));
      bnd  = '0;
      bnd.cc    = (p_op != CP_NONE);
      bnd.op_ok = bnd.cc && ($urandom_range(15, 0) != 0);
      bnd.base  = 64'h4000 + 64'($urandom_range(255, 0));
      bnd.top   = {1'b0, bnd.base} + 65'd256;
      bnd.optop = {1'b0, bnd.base} + 65'($urandom_range(256, 0));
      addr = 64'(bnd.optop) + 64'($urandom_range(16, 0)) - 64'd8;
      if ($urandom_range(3, 0) == 0) addr = bnd.base + 64'($urandom_range(255, 0));
      #1;
      a0 = {1'b0, addr};
      a1 = a0 + 65'(size);
      below = (a0 >= {1'b0, bnd.base}) && (a1 <= bnd.optop);
      above = (a0 >= bnd.optop);
      reach = (a0 <= bnd.optop) && (a1 > bnd.optop);
      e_fault = 1'b0; e_upd = 1'b0;
      case (p_op)
        CP_WBR:  if (acc == ACC_LOAD) e_fault = !below; else e_upd = reach;
        CP_WBX:  if (acc == ACC_STORE) e_upd = reach;
        CP_WBRO: if (acc == ACC_LOAD) e_fault = !below; else begin e_fault = !above; e_upd = reach; end
        CP_WBXO: if (acc == ACC_STORE) begin e_fault = !above; e_upd = reach; end
        CP_WO:   if (acc == ACC_STORE) begin e_fault = !above; e_upd = reach; end
        CP_RO:   if (acc == ACC_LOAD) begin e_fault = !above; e_upd = reach; end else e_upd = reach;
        default: ;
      endcase
      // a bound that cannot be represented blocks every access the permission conditions
      if (bnd.cc && !bnd.op_ok &&
          ((p_op inside {CP_WBR, CP_WBX, CP_WBRO, CP_WBXO, CP_WO, CP_RO} && acc == ACC_STORE) ||
           (p_op inside {CP_WBR, CP_WBRO, CP_RO} && acc == ACC_LOAD)))
        e_fault = 1'b1;
      if (e_fault) e_upd = 1'b0;
      n_fault += int'(e_fault);
      n_upd   += int'(e_upd);
      check(fault == e_fault, $sformatf("fault %0d exp %0d cp %0d acc %0d addr %h size %0d optop %h",
                                        fault, e_fault, p_op, acc, addr, size, bnd.optop));
      check(update == e_upd, $sformatf("update %0d exp %0d cp %0d acc %0d addr %h size %0d optop %h",
                                       update, e_upd, p_op, acc, addr, size, bnd.optop));
      if (e_upd) check(new_optop == a1, "new operation top");
    end
    check(n_fault > 1000 && n_upd > 300, $sformatf("coverage of faults (%0d) and updates (%0d)", n_fault, n_upd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
