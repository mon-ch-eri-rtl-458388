// cap_check_tb: random data accesses through random capabilities; the
// expected verdict (tag, seal, permission, bounds, in that priority) is
// computed in the testbench from the same numbers.
module cap_check_tb;
  import moncheri_pkg::*;

  tcap_t       cap;
  bounds_t     bnd;
  logic [63:0] addr;
  logic [3:0]  size;
  acc_e        acc;
  logic        fault;
  cause_e      cause;
  int checks = 0, failures = 0;
  int seen [cause_e];

  cap_check dut (.*);

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
    cause_e exp;
    for (int i = 0; i < 20000; i++) begin
      cap = '0;
      cap.tag = ($urandom_range(15, 0) != 0);
      cap.cap.otype = ($urandom_range(15, 0) != 0) ? OTYPE_UNSEALED : 18'($urandom_range(100, 0));
      cap.cap.p_hw = 12'($urandom()) | (($urandom_range(3, 0) != 0) ? 12'h00E : 12'h000);
      acc = acc_e'($urandom_range(2, 0));
      size = 4'(1 << $urandom_range(3, 0));
      bnd = '0;
      bnd.base = 64'h1_0000 + 64'($urandom_range(4095, 0));
      bnd.top  = {1'b0, bnd.base} + 65'($urandom_range(64, 0));
      addr = bnd.base + 64'($urandom_range(80, 0)) - 64'd8;
      #1;
      if (!cap.tag)                                        exp = CAUSE_TAG;
      else if (cap.cap.otype != 18'h3FFFF)                 exp = CAUSE_SEAL;
      else if (acc == ACC_LOAD  && !cap.cap.p_hw[2])       exp = CAUSE_PERM_LOAD;
      else if (acc == ACC_STORE && !cap.cap.p_hw[3])       exp = CAUSE_PERM_STORE;
      else if (acc == ACC_EXEC  && !cap.cap.p_hw[1])       exp = CAUSE_PERM_EXEC;
      else if (addr < bnd.base || {1'b0, addr} + 65'(size) > bnd.top) exp = CAUSE_LENGTH;
      else                                                 exp = CAUSE_NONE;
      seen[exp]++;
      check(fault == (exp != CAUSE_NONE), $sformatf("fault %0d exp cause %s", fault, exp.name()));
      check(cause == exp, $sformatf("cause %s exp %s", cause.name(), exp.name()));
    end
    check(seen.num() == 7, "every cause seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
