// cc_decode: decodes the instructions handled by the conditional-capability
// execute block into a micro-operation.
//
// Recognised are the RV64 loads (LB/LH/LW/LD/LBU/LHU/LWU) and stores
// (SB/SH/SW/SD), which in capability mode address memory through the
// capability in rs1, and the seven CSetOpBounds variants. The variants sit in
// the custom-2 opcode space used by the CHERI extension, R-type with
// funct3 = 0 and funct7 = 0x28 + (variant - 1), cd = rd, cs1 = rs1 and the
// length in rs2. Anything else is flagged illegal. Purely combinational.
module cc_decode
  import moncheri_pkg::*;
(
  input  logic [31:0] instr,
  output uop_t        uop
);

  logic [6:0] opc, f7;
  logic [2:0] f3;

  always_comb begin
    opc = instr[6:0];
    f3  = instr[14:12];
    f7  = instr[31:25];
    uop             = '0;
    uop.rd          = instr[11:7];
    uop.rs1         = instr[19:15];
    uop.rs2         = instr[24:20];
    uop.size_log2   = f3[1:0];
    uop.unsigned_ld = f3[2];
    uop.cp          = CP_NONE;
    unique case (opc)
      OPC_LOAD: begin
        uop.kind    = UOP_LOAD;
        uop.imm     = instr[31:20];
        uop.illegal = (f3 == 3'd7);
      end
      OPC_STORE: begin
        uop.kind    = UOP_STORE;
        uop.imm     = {instr[31:25], instr[11:7]};
        uop.illegal = f3[2];
        uop.rd      = 5'd0;
      end
      OPC_CUSTOM2: begin
        uop.kind    = UOP_CSETOPB;
        uop.cp      = cp_e'(f7 - F7_CSETOPB_BASE + 7'd1);
        uop.illegal = (f3 != 3'd0) || (f7 < F7_CSETOPB_BASE) ||
                      (f7 > F7_CSETOPB_BASE + 7'd6);
      end
      default: begin
        uop.kind    = UOP_NONE;
        uop.illegal = 1'b1;
      end
    endcase
  end

endmodule
