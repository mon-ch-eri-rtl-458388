// moncheri_exec_tb: end-to-end test of the conditional-capability execute
// block with a data memory model and an instruction supplier that restarts
// after the faulting instruction when a trap is raised.
//
// Scenarios (expected traps and values are worked out by hand below):
//   1 the hazard sequence of a fresh Write-before-Read variable: set the bound,
//     store, load at once through the same register (bypass from S2)
//   2 an uninitialised load traps, a load after the store does not
//   3 a bound update reaching a load two instructions later (bypass from S3)
//   4 load-use stall
//   5 Write-Once, Write-before-Read-Only and Read-Once rules
//   6 Write-before-Execute and Execute-Once on the PCC
//   7 conventional checks (bounds, tag) and CSetOpBounds refusals
//   8 the store/load microbenchmark: a 256-element int array written and read
//     back through a Write-before-Read capability, back to back, checked for
//     zero stall cycles and one retirement per cycle
// Every mechanism counter (S2 bypass, S3 bypass, bound-carrying bypass, stall,
// bound update, PCC bound update, trap) must fire at least once.
module moncheri_exec_tb;
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
  int n_bypass_s2 = 0, n_bypass_s3 = 0, n_opb_bypass = 0, n_stall = 0;
  int n_opb_update = 0, n_pcc_update = 0, n_trap = 0, n_retire = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ data memory
  localparam int MEM_WORDS = 8192;           // 64 KiB at 0x1_0000
  logic [63:0] mem [MEM_WORDS];
  always_ff @(posedge clk) begin
    if (dmem_req_valid) begin
      dmem_rdata <= mem[dmem_req_addr[15:3]];
      if (dmem_req_we)
        for (int b = 0; b < 8; b++)
          if (dmem_req_be[b]) mem[dmem_req_addr[15:3]][b*8 +: 8] <= dmem_req_wdata[b*8 +: 8];
    end
  end

  always @(posedge clk) if (rst_n) begin
    n_bypass_s2  += int'(events.bypass_s2);
    n_bypass_s3  += int'(events.bypass_s3);
    n_opb_bypass += int'(events.opb_bypass);
    n_stall      += int'(events.load_stall);
    n_opb_update += int'(events.opb_update);
    n_pcc_update += int'(events.pcc_update);
    n_trap       += int'(events.trap);
    n_retire     += int'(retire_valid);
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
  function automatic logic [31:0] CSETOPB(cp_e v, int rd, int rs1, int rs2);
    return {7'(7'h27 + 7'(v)), 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b1011011};
  endfunction

  function automatic tcap_t INT(logic [63:0] v);
    tcap_t c = '0;
    c.cap.cursor = v;
    return c;
  endfunction

  // --------------------------------------------------------------- helpers
  localparam logic [63:0] CODE = 64'h8000_0000;
  localparam logic [63:0] HEAP = 64'h0001_0000;

  typedef struct { logic [63:0] pc; cause_e cause; } trap_t;
  trap_t traps[$];
  int    first_acc, last_ret, cyc;

  always @(posedge clk) cyc++;

  task automatic setreg(int r, tcap_t v);
    @(negedge clk);
    ext_wr_valid = 1'b1; ext_wr_idx = 5'(r); ext_wr_data = v;
    @(negedge clk);
    ext_wr_valid = 1'b0;
  endtask

  task automatic setpcc(tcap_t v);
    @(negedge clk);
    pcc_wr_valid = 1'b1; pcc_wr_data = v;
    @(negedge clk);
    pcc_wr_valid = 1'b0;
  endtask

  // Runs a program from pc0; after a trap the supplier resumes after the
  // faulting instruction, as a handler that skips it would.
  task automatic run(logic [31:0] p[$], logic [63:0] pc0);
    int idx = 0, drain = 0;
    traps.delete();
    first_acc = -1;
    while (idx < p.size() || drain < 4) begin
      @(negedge clk);
      in_valid = (idx < p.size());
      in_instr = in_valid ? p[idx] : 32'h0;
      in_pc    = pc0 + 64'(idx * 4);
      #4;
      if (retire_valid) last_ret = cyc;
      if (trap_valid) begin
        traps.push_back('{pc: trap_pc, cause: trap_cause});
        idx = int'((trap_pc - pc0) >> 2) + 1;
      end else if (in_valid && in_ready) begin
        if (first_acc < 0) first_acc = cyc;
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

  bounds_t dbg_bnd;
  cap_t    dbg_cap;
  cap_decode u_dbg_dec (.cap(dbg_cap), .bnd(dbg_bnd));

  task automatic expect_traps(string name, int n, logic [63:0] pc0, int idx0 = -1, cause_e c0 = CAUSE_NONE);
    check(traps.size() == n, $sformatf("%s: %0d traps, expected %0d", name, traps.size(), n));
    if (n > 0 && traps.size() > 0 && idx0 >= 0)
      check(traps[0].pc == pc0 + 64'(idx0 * 4) && traps[0].cause == c0,
            $sformatf("%s: trap at %h cause %s", name, traps[0].pc, traps[0].cause.name()));
  endtask

  // -------------------------------------------------------------- scenarios
  tcap_t heap_cap, code_cap;
  logic [31:0] p[$];

  initial begin
    in_valid = 0; in_instr = 0; in_pc = 0;
    ext_wr_valid = 0; ext_wr_idx = 0; ext_wr_data = '0;
    pcc_wr_valid = 0; pcc_wr_data = '0;
    cyc = 0;
    for (int i = 0; i < MEM_WORDS; i++) mem[i] = 64'hDEAD_BEEF_0000_0000 | 64'(i);
    repeat (3) @(posedge clk);
    rst_n = 1;

    code_cap = mk_cap(CODE, {1'b0, CODE} + 65'hFFC, CODE, 1'b0, 0, CP_NONE, 65'h0, 12'h007);
    heap_cap = mk_cap(HEAP, {1'b0, HEAP} + 65'h400, HEAP, 1'b0, 0, CP_NONE, 65'h0, PERMS_RWX);
    setpcc(code_cap);

    // 1: csetwbrbound ca0, ca0, zero ; sw a1, 0(ca0) ; lw a0, 0(ca0)
    setreg(10, heap_cap);
    setreg(11, INT(64'd10));
    p = '{CSETOPB(CP_WBR, 10, 10, 0), SW(11, 10, 0), LW(12, 10, 0)};
    run(p, CODE);
    expect_traps("hazard sequence", 0, CODE);
    check(rf(12).cap.cursor == 64'd10 && !rf(12).tag, "hazard sequence: loaded value");
    dbg_cap = rf(10).cap; #1;
    check(dbg_bnd.optop == {1'b0, HEAP} + 65'd4 && rf(10).cap.p_op == CP_WBR,
          $sformatf("hazard sequence: bound after one store %h", dbg_bnd.optop));
    check(last_ret - first_acc == 3 + 2, $sformatf("hazard sequence: %0d cycles", last_ret - first_acc));

    // 2: uninitialised read traps; written data reads back
    setreg(10, heap_cap);
    p = '{CSETOPB(CP_WBR, 10, 10, 0), LW(12, 10, 4), SW(11, 10, 0), SW(11, 10, 4), LW(13, 10, 4), LW(14, 10, 8)};
    run(p, CODE);
    expect_traps("uninitialised read", 2, CODE, 1, CAUSE_OPBOUND);
    if (traps.size() == 2) check(traps[1].pc == CODE + 64'd20 && traps[1].cause == CAUSE_OPBOUND, "read past bound");
    check(rf(13).cap.cursor == 64'd10, "read after write");

    // 3: bound update reaching a load two instructions later (S3 bypass)
    setreg(10, heap_cap);
    setreg(20, heap_cap);
    p = '{CSETOPB(CP_WBR, 10, 10, 0), SD(11, 10, 0), SD(11, 20, 64), LD(15, 10, 0)};
    run(p, CODE);
    expect_traps("S3 bypass", 0, CODE);
    check(rf(15).cap.cursor == 64'd10, "S3 bypass value");

    // 4: load-use stall: the loaded value is stored at once
    setreg(10, heap_cap);
    p = '{CSETOPB(CP_WBR, 10, 10, 0), SD(11, 10, 0), LD(16, 10, 0), SD(16, 10, 8), LD(17, 10, 8)};
    run(p, CODE);
    expect_traps("load use", 0, CODE);
    check(rf(17).cap.cursor == 64'd10, "load use value");

    // 5a: Write-Once: second store to the same word traps
    setreg(10, heap_cap);
    p = '{CSETOPB(CP_WO, 10, 10, 0), SW(11, 10, 0), SW(11, 10, 4), SW(11, 10, 0), LW(18, 10, 12)};
    run(p, CODE);
    expect_traps("write once", 1, CODE, 3, CAUSE_OPBOUND);
    // 5b: Write-before-Read-Only: read before write and rewrite trap
    setreg(10, heap_cap);
    p = '{CSETOPB(CP_WBRO, 10, 10, 0), LW(18, 10, 0), SW(11, 10, 0), LW(18, 10, 0), SW(11, 10, 0)};
    run(p, CODE);
    expect_traps("write before read only", 2, CODE, 1, CAUSE_OPBOUND);
    if (traps.size() == 2) check(traps[1].pc == CODE + 64'd16, "rewrite traps");
    check(rf(18).cap.cursor == 64'd10, "WBRO value");
    // 5c: Read-Once: each word can be read once
    setreg(10, heap_cap);
    p = '{CSETOPB(CP_RO, 10, 10, 0), LW(19, 10, 0), LW(19, 10, 4), LW(19, 10, 0)};
    run(p, CODE);
    expect_traps("read once", 1, CODE, 3, CAUSE_OPBOUND);

    // 6a: Write-before-Execute PCC: 2 instructions of code written
    setpcc(mk_cap(CODE, {1'b0, CODE} + 65'hFFC, CODE, 1'b0, 0, CP_WBX, {1'b0, CODE} + 65'd8, 12'h007));
    setreg(10, heap_cap);
    p = '{SD(11, 10, 0), SD(11, 10, 8), SD(11, 10, 16)};
    run(p, CODE);
    expect_traps("write before execute", 1, CODE, 2, CAUSE_OPBOUND);
    // 6b: Execute-Once PCC: straight-line code runs once, a re-run traps
    setpcc(mk_cap(CODE, {1'b0, CODE} + 65'hFFC, CODE, 1'b0, 0, CP_XO, {1'b0, CODE}, 12'h007));
    p = '{SD(11, 10, 0), SD(11, 10, 8), SD(11, 10, 16)};
    run(p, CODE);
    expect_traps("execute once, first run", 0, CODE);
    dbg_cap = pcc_out.cap; #1;
    check(dbg_bnd.optop == {1'b0, CODE} + 65'd12, "execute once: bound after three instructions");
    run(p, CODE);
    expect_traps("execute once, second run", 3, CODE, 0, CAUSE_OPBOUND);
    setpcc(code_cap);

    // 7: conventional checks and CSetOpBounds refusals
    setreg(10, heap_cap);
    setreg(21, INT(64'h500));
    setreg(22, INT(64'h100));
    setreg(23, INT(64'h200));
    p = '{SD(11, 10, 1024), LD(12, 11, 0), CSETOPB(CP_WBR, 10, 10, 21),
          CSETOPB(CP_WBR, 10, 10, 22), CSETOPB(CP_WBR, 10, 10, 23), CSETOPB(CP_WO, 10, 10, 22),
          SW(11, 10, 2)};
    run(p, CODE);
    check(traps.size() == 6, $sformatf("refusals: %0d traps", traps.size()));
    if (traps.size() == 6) begin
      check(traps[0].cause == CAUSE_LENGTH, "store past top");
      check(traps[1].cause == CAUSE_TAG,    "integer used as capability");
      check(traps[2].cause == CAUSE_LENGTH, "operation bound past top");
      check(traps[3].cause == CAUSE_OPBOUND && traps[3].pc == CODE + 64'd16, "bound may not grow");
      check(traps[4].cause == CAUSE_OPBOUND, "variant may not change");
      check(traps[5].cause == CAUSE_MISALIGN, "misaligned store");
    end
    dbg_cap = rf(10).cap; #1;
    check(dbg_bnd.optop == {1'b0, HEAP} + 65'h100, "bound set to 0x100");

    // 8: 256-element int array written then read back (microbenchmark)
    setreg(10, heap_cap);
    for (int r = 16; r < 32; r++) setreg(r, INT(64'h1111 * 64'(r)));
    p = '{CSETOPB(CP_WBR, 10, 10, 0)};
    for (int i = 0; i < 256; i++) p.push_back(SW(16 + i % 16, 10, 4 * i));
    for (int i = 0; i < 256; i++) p.push_back(LW(1 + i % 9, 10, 4 * i));
    begin
      int st0, rt0;
      st0 = n_stall; rt0 = n_retire;
      run(p, CODE);
      expect_traps("array benchmark", 0, CODE);
      check(n_stall == st0, "array benchmark: no stall cycles");
      check(n_retire - rt0 == 513, $sformatf("array benchmark: %0d retired", n_retire - rt0));
      check(last_ret - first_acc == 513 + 2, $sformatf("array benchmark: %0d cycles for 513 instructions",
                                                    last_ret - first_acc));
    end
    for (int i = 247; i < 256; i++)
      check(rf(1 + i % 9).cap.cursor == 64'h1111 * 64'(16 + i % 16), $sformatf("array element %0d", i));
    for (int i = 0; i < 256; i++)
      check(mem[(HEAP[15:0] >> 3) + i / 2][32 * (i % 2) +: 32] == 32'(64'h1111 * 64'(16 + i % 16)),
            $sformatf("memory element %0d", i));
    dbg_cap = rf(10).cap; #1;
    check(dbg_bnd.optop == dbg_bnd.top, "array benchmark: bound reached top");

    // mechanisms
    check(n_bypass_s2 > 0,  "S2 bypass never used");
    check(n_bypass_s3 > 0,  "S3 bypass never used");
    check(n_opb_bypass > 0, "operation-bound bypass never used");
    check(n_stall > 0,      "load-use stall never happened");
    check(n_opb_update > 0, "operation bound never updated");
    check(n_pcc_update > 0, "PCC bound never updated");
    check(n_trap > 0,       "no trap raised");
    $display("mechanisms: bypass_s2=%0d bypass_s3=%0d opb_bypass=%0d stall=%0d opb_update=%0d pcc_update=%0d trap=%0d retired=%0d",
             n_bypass_s2, n_bypass_s3, n_opb_bypass, n_stall, n_opb_update, n_pcc_update, n_trap, n_retire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
