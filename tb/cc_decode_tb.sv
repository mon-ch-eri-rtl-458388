// cc_decode_tb: assembles loads, stores and CSetOpBounds variants with random
// registers and immediates and checks every micro-operation field; also
// checks that other opcodes and unused function codes are flagged illegal.
module cc_decode_tb;
  import moncheri_pkg::*;

  logic [31:0] instr;
  uop_t        uop;
  int checks = 0, failures = 0;

  cc_decode dut (.*);

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
    logic [4:0]  rd, rs1, rs2;
    logic [11:0] imm;
    logic [2:0]  f3;
    int          v;
    for (int i = 0; i < 2000; i++) begin
      rd = 5'($urandom()); rs1 = 5'($urandom()); rs2 = 5'($urandom()); imm = 12'($urandom());
      f3 = 3'($urandom_range(6, 0));
      instr = {imm, rs1, f3, rd, 7'b0000011}; #1;
      check(uop.kind == UOP_LOAD && !uop.illegal && uop.rd == rd && uop.rs1 == rs1 &&
            uop.imm == imm && uop.size_log2 == f3[1:0] && uop.unsigned_ld == f3[2], "load");
      f3 = 3'($urandom_range(3, 0));
      instr = {imm[11:5], rs2, rs1, f3, imm[4:0], 7'b0100011}; #1;
      check(uop.kind == UOP_STORE && !uop.illegal && uop.rd == 5'd0 && uop.rs1 == rs1 &&
            uop.rs2 == rs2 && uop.imm == imm && uop.size_log2 == f3[1:0], "store");
      v = $urandom_range(7, 1);
      instr = {7'(7'h27 + v), rs2, rs1, 3'b000, rd, 7'b1011011}; #1;
      check(uop.kind == UOP_CSETOPB && !uop.illegal && uop.cp == cp_e'(v) && uop.rd == rd &&
            uop.rs1 == rs1 && uop.rs2 == rs2, $sformatf("csetopbounds variant %0d", v));
    end
    instr = {7'h27, 5'd1, 5'd2, 3'b000, 5'd3, 7'b1011011}; #1;
    check(uop.illegal, "funct7 below the CSetOpBounds range");
    instr = {7'h2F, 5'd1, 5'd2, 3'b000, 5'd3, 7'b1011011}; #1;
    check(uop.illegal, "funct7 above the CSetOpBounds range");
    instr = {7'h28, 5'd1, 5'd2, 3'b001, 5'd3, 7'b1011011}; #1;
    check(uop.illegal, "funct3 not zero");
    instr = 32'h00a00593; #1;  // addi a1, zero, 10
    check(uop.illegal, "addi not handled here");
    instr = {12'd0, 5'd1, 3'b111, 5'd2, 7'b0000011}; #1;
    check(uop.illegal, "load funct3 7");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
