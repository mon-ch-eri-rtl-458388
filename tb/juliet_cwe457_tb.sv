// juliet_cwe457_tb: use-of-uninitialised-variable test cases on the complete
// execute block.
//
// Two cases of the CWE-457 family from the Juliet test suite, compiled by hand
// into the instruction stream a Write-before-Read compiler emits: every
// protected stack object gets a capability with exact bounds followed by
// csetwbrbound with length 0.
//
//   double_63  a volatile double left uninitialised, passed by pointer and
//              dereferenced in the callee.
//              bad:  the callee loads it             -> one operation-bound trap
//              good: the caller stores 5.0 first     -> no trap, value read back
//   int_array_alloca_partial_init_64
//              a 10-int array of which the first 5 are written in a loop; the
//              sink then reads all 10.
//              bad:  partial init                    -> traps on elements 5..9
//              good: all 10 written                  -> no trap
//
// The trap handler model skips the faulting instruction and continues, so
// every uninitialised read of a case is counted, not only the first one.
// Memory starts filled with a stale pattern; no trapped load may write its
// destination register.
module juliet_cwe457_tb;
  import moncheri_pkg::*;
  import moncheri_tb_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid, in_ready;
  logic [31:0] in_instr;
  logic [63:0] in_pc;
  logic        ext_wr_valid, pcc_wr_valid;
  logic [4:0]  ext_wr_idx;
  tcap_t       ext_wr_data, pcc_wr_data, pcc_out;
  logic        dmem_req_valid, dmem_req_we;
  logic [63:0] dmem_req_addr, dmem_req_wdata, dmem_rdata;
  logic [7:0]  dmem_req_be;
  logic        trap_valid, retire_valid;
  cause_e      trap_cause;
  logic [63:0] trap_pc, retire_pc;
  events_t     events;

  moncheri_exec dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stack memory
  localparam logic [63:0] STACK = 64'h0002_0000;
  localparam logic [63:0] STALE = 64'hBAD0_BAD0_BAD0_BAD0;
  logic [63:0] mem [512];
  always_ff @(posedge clk) begin
    if (dmem_req_valid) begin
      dmem_rdata <= mem[dmem_req_addr[11:3]];
      if (dmem_req_we)
        for (int b = 0; b < 8; b++)
          if (dmem_req_be[b]) mem[dmem_req_addr[11:3]][b*8 +: 8] <= dmem_req_wdata[b*8 +: 8];
    end
  end

  // ------------------------------------------------------------- assembler
  function automatic logic [31:0] LW(int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b010, 5'(rd), 7'b0000011};
  endfunction
  function automatic logic [31:0] LD(int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b011, 5'(rd), 7'b0000011};
  endfunction
  function automatic logic [31:0] SW(int rs2, int rs1, int imm);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b010, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] SD(int rs2, int rs1, int imm);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b011, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] CSETWBR(int rd, int rs1, int rs2);
    return {7'(7'h27 + 7'(CP_WBR)), 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b1011011};
  endfunction

  function automatic tcap_t INT(logic [63:0] v);
    tcap_t c = '0;
    c.cap.cursor = v;
    return c;
  endfunction

  localparam logic [63:0] CODE = 64'h8000_0000;

  task automatic setreg(int r, tcap_t v);
    @(negedge clk);
    ext_wr_valid = 1'b1; ext_wr_idx = 5'(r); ext_wr_data = v;
    @(negedge clk);
    ext_wr_valid = 1'b0;
  endtask

  // Runs a program; records the index of every trapping instruction and
  // resumes after it.
  int trap_idx[$];
  task automatic run(logic [31:0] p[$]);
    int idx = 0, drain = 0;
    trap_idx.delete();
    while (idx < p.size() || drain < 4) begin
      @(negedge clk);
      in_valid = (idx < p.size());
      in_instr = in_valid ? p[idx] : 32'h0;
      in_pc    = CODE + 64'(idx * 4);
      #4;
      if (trap_valid) begin
        check(trap_cause == CAUSE_OPBOUND, $sformatf("trap cause %s", trap_cause.name()));
        trap_idx.push_back(int'((trap_pc - CODE) >> 2));
        idx = int'((trap_pc - CODE) >> 2) + 1;
      end else if (in_valid && in_ready) begin
        idx++;
      end
      drain = (idx < p.size()) ? 0 : drain + 1;
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  function automatic tcap_t rf(int r);
    return dut.u_rf.regs[r];
  endfunction

  // ca0 (x10) holds the protected object, a1 (x11) the value to store.
  localparam int CA0 = 10, A1 = 11;

  // double_63: an 8-byte volatile double at STACK.
  task automatic double_63(bit good);
    logic [31:0] p[$];
    setreg(CA0, mk_cap(STACK, {1'b0, STACK} + 65'd8, STACK, 1'b0, 0, CP_NONE, 65'h0, PERMS_RWX));
    setreg(A1, INT(64'h4014_0000_0000_0000));        // 5.0
    setreg(5, INT(64'h0));
    p = '{CSETWBR(CA0, CA0, 0)};                      // volatile double data;
    if (good) p.push_back(SD(A1, CA0, 0));            // data = 5.0 before the call
    p.push_back(LD(5, CA0, 0));                       // *dataPtr in the sink
    run(p);
    if (good) begin
      check(trap_idx.size() == 0, $sformatf("double_63 good: %0d traps", trap_idx.size()));
      check(rf(5).cap.cursor == 64'h4014_0000_0000_0000, "double_63 good: value");
    end else begin
      check(trap_idx.size() == 1 && trap_idx[0] == 1, $sformatf("double_63 bad: %0d traps", trap_idx.size()));
      check(rf(5).cap.cursor == 64'h0, "double_63 bad: stale value reached a register");
    end
  endtask

  // int_array_alloca_partial_init_64: int data[10] at STACK + 64, of which
  // the first n_init are written before the sink reads all ten.
  task automatic int_array_partial(int n_init);
    logic [31:0] p[$];
    logic [63:0] base;
    base = STACK + 64'd64;
    setreg(CA0, mk_cap(base, {1'b0, base} + 65'd40, base, 1'b0, 0, CP_NONE, 65'h0, PERMS_RWX));
    for (int i = 0; i < 10; i++) setreg(16 + i, INT(64'(i)));
    for (int r = 26; r < 30; r++) setreg(r, INT(64'h0));
    p = '{CSETWBR(CA0, CA0, 0)};
    for (int i = 0; i < n_init; i++) p.push_back(SW(16 + i, CA0, 4 * i));   // data[i] = i
    for (int i = 0; i < 10; i++) p.push_back(LW(26 + i % 4, CA0, 4 * i));   // sink reads data[i]
    run(p);
    check(trap_idx.size() == 10 - n_init,
          $sformatf("int array, %0d of 10 written: %0d traps", n_init, trap_idx.size()));
    foreach (trap_idx[k])
      check(trap_idx[k] == 1 + 2 * n_init + k,
            $sformatf("int array, %0d written: trap %0d at instruction %0d", n_init, k, trap_idx[k]));
    for (int i = 0; i < n_init; i++)
      check(mem[9'(base[11:3]) + 9'(i / 2)][32 * (i % 2) +: 32] == 32'(i),
            $sformatf("int array: data[%0d] in memory", i));
    // Only the loads of written elements complete; each of x26..x29 holds
    // the last of them that targeted it.
    for (int r = 0; r < 4; r++) begin
      int last;
      last = -1;
      for (int i = 0; i < n_init; i++) if (i % 4 == r) last = i;
      check(rf(26 + r).cap.cursor == (last < 0 ? 64'h0 : 64'(last)),
            $sformatf("int array, %0d written: x%0d holds %h", n_init, 26 + r, rf(26 + r).cap.cursor));
    end
  endtask

  initial begin
    in_valid = 0; in_instr = 0; in_pc = 0;
    ext_wr_valid = 0; ext_wr_idx = 0; ext_wr_data = '0;
    pcc_wr_valid = 0; pcc_wr_data = '0;
    for (int i = 0; i < 512; i++) mem[i] = STALE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    pcc_wr_valid = 1'b1;
    pcc_wr_data  = mk_cap(CODE, {1'b0, CODE} + 65'hFFC, CODE, 1'b0, 0, CP_NONE, 65'h0, 12'h007);
    @(negedge clk);
    pcc_wr_valid = 1'b0;

    double_63(1'b0);
    double_63(1'b1);
    int_array_partial(5);
    for (int i = 0; i < 512; i++) mem[i] = STALE;
    int_array_partial(10);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
