// moncheri_pkg: types and constants shared by the conditional-capability
// (Mon CHERI) blocks.
//
// A capability is 128 bits plus a validity tag. Its upper 64 bits hold the
// permissions, flag, object type and the CHERI Concentrate bounds (internal
// exponent IE, T[11:3] with T_E, B[13:3] with B_E). The lower 64 bits are the
// cursor. When the 4-bit conditional-permission field p_op is non-zero the
// capability is a conditional capability: the top 16 bits of the cursor then
// hold the compressed operation top (O[13:3] in 11 bits, O_E in 5 bits) and
// only cursor[47:0] is the address. The field layout, the mantissa width of 14
// and the 48-bit address mask follow the published format; the numeric values
// of the p_op states, the CSetOpBounds function codes and the exception cause
// used for an operation-bound violation are this design's own choices.
package moncheri_pkg;

  localparam int unsigned XLEN       = 64;   // integer register width
  localparam int unsigned CAP_W      = 128;  // compressed capability width
  localparam int unsigned MW         = 14;   // CHERI Concentrate mantissa width
  localparam int unsigned CC_AW      = 48;   // address width of a conditional capability
  localparam int unsigned MAX_E      = 52;   // largest exponent of a 128-bit capability
  localparam int unsigned CC_MAX_E   = 2;    // largest exponent whose operation top fits O_E
  localparam int unsigned NREGS      = 32;   // merged integer/capability registers
  localparam logic [17:0] OTYPE_UNSEALED = 18'h3FFFF;

  // Conditional-permission states held in p_op (0 = no conditional permission).
  typedef enum logic [3:0] {
    CP_NONE = 4'd0,
    CP_WBR  = 4'd1,   // Write-before-Read            (csetwbrbound)
    CP_WBX  = 4'd2,   // Write-before-Execute         (csetwbxbound)
    CP_WBRO = 4'd3,   // Write-before-Read-Only       (csetrobound)
    CP_WBXO = 4'd4,   // Write-before-Execute-Only    (csetxobound)
    CP_WO   = 4'd5,   // Write-Once                   (csetwtbound)
    CP_RO   = 4'd6,   // Read-Once                    (csetrtbound)
    CP_XO   = 4'd7    // Execute-Once                 (csetxtbound)
  } cp_e;

  // Hardware permission bits inside p_hw (CHERI ISAv9 order).
  localparam int unsigned PERM_GLOBAL  = 0;
  localparam int unsigned PERM_EXECUTE = 1;
  localparam int unsigned PERM_LOAD    = 2;
  localparam int unsigned PERM_STORE   = 3;

  typedef struct packed {
    cp_e         p_op;     // [127:124] conditional-permission control bits
    logic [11:0] p_hw;     // [123:112] hardware permissions
    logic        flag;     // [111]
    logic [1:0]  rsvd;     // [110:109]
    logic [17:0] otype;    // [108:91]
    logic        ie;       // [90]    internal exponent
    logic [8:0]  t_hi;     // [89:81] T[11:3]
    logic [2:0]  t_e;      // [80:78] T[2:0] or high half of E
    logic [10:0] b_hi;     // [77:67] B[13:3]
    logic [2:0]  b_e;      // [66:64] B[2:0] or low half of E
    logic [63:0] cursor;   // [63:0]  address; for a CC {O[13:3], O_E, a[47:0]}
  } cap_t;

  typedef struct packed {
    logic tag;
    cap_t cap;
  } tcap_t;

  // Bounds of a capability after decompression.
  typedef struct packed {
    logic        cc;       // p_op != 0
    logic        op_ok;    // operation top is representable (IE = 0 or E <= CC_MAX_E)
    logic [5:0]  e;        // exponent
    logic [63:0] addr;     // address (masked to 48 bits for a CC)
    logic [63:0] base;
    logic [64:0] top;
    logic [64:0] optop;    // operation top (only meaningful when cc)
  } bounds_t;

  typedef enum logic [1:0] { ACC_LOAD = 2'd0, ACC_STORE = 2'd1, ACC_EXEC = 2'd2 } acc_e;

  // How one conditional permission treats one kind of access.
  //   need_in : the access must lie inside [base, optop)  (operation already happened)
  //   need_out: the access must lie at or above optop     (operation must not have happened)
  //   update : an access that reaches optop extends optop to its end
  typedef struct packed {
    logic need_in;
    logic need_out;
    logic update;
  } cp_rule_t;

  function automatic cp_rule_t cp_rule(cp_e cp, acc_e acc);
    cp_rule_t r;
    r = '0;
    unique case (cp)
      CP_WBR:  begin r.need_in = (acc == ACC_LOAD);  r.update = (acc == ACC_STORE); end
      CP_WBX:  begin r.need_in = (acc == ACC_EXEC);  r.update = (acc == ACC_STORE); end
      CP_WBRO: begin r.need_in = (acc == ACC_LOAD);
                     r.need_out = (acc == ACC_STORE); r.update = (acc == ACC_STORE); end
      CP_WBXO: begin r.need_in = (acc == ACC_EXEC);
                     r.need_out = (acc == ACC_STORE); r.update = (acc == ACC_STORE); end
      CP_WO:   begin r.need_out = (acc == ACC_STORE); r.update = (acc == ACC_STORE); end
      CP_RO:   begin r.need_out = (acc == ACC_LOAD);
                     r.update = (acc == ACC_LOAD) || (acc == ACC_STORE); end
      CP_XO:   begin r.need_out = (acc == ACC_EXEC);  r.update = (acc == ACC_EXEC); end
      default: r = '0;
    endcase
    return r;
  endfunction

  // Exception causes (CHERI ISAv9 capability cause codes where one exists).
  typedef enum logic [4:0] {
    CAUSE_NONE      = 5'h00,
    CAUSE_LENGTH    = 5'h01,
    CAUSE_TAG       = 5'h02,
    CAUSE_SEAL      = 5'h03,
    CAUSE_PERM_EXEC = 5'h11,
    CAUSE_PERM_LOAD = 5'h12,
    CAUSE_PERM_STORE= 5'h13,
    CAUSE_OPBOUND   = 5'h1C,   // conditional-permission / operation-bound violation
    CAUSE_ILLEGAL   = 5'h1D,   // instruction not handled by this execute block
    CAUSE_MISALIGN  = 5'h1E    // misaligned data access
  } cause_e;

  // Micro-operation produced by cc_decode.
  typedef enum logic [1:0] { UOP_NONE = 2'd0, UOP_LOAD = 2'd1, UOP_STORE = 2'd2, UOP_CSETOPB = 2'd3 } uop_kind_e;

  typedef struct packed {
    uop_kind_e   kind;
    logic        illegal;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [11:0] imm;       // sign-extended at use
    logic [1:0]  size_log2; // 0..3 = 1, 2, 4, 8 bytes
    logic        unsigned_ld;
    cp_e         cp;        // CSetOpBounds variant
  } uop_t;

  // CSetOpBounds encoding: custom-2 opcode, funct3 = 0, funct7 selects the variant.
  localparam logic [6:0] OPC_LOAD    = 7'b0000011;
  localparam logic [6:0] OPC_STORE   = 7'b0100011;
  localparam logic [6:0] OPC_CUSTOM2 = 7'b1011011;
  localparam logic [6:0] F7_CSETOPB_BASE = 7'h28;  // 0x28 + (variant - 1)

  // Events exported for counting by a performance monitor.
  typedef struct packed {
    logic bypass_s2;   // an S1 operand was taken from S2
    logic bypass_s3;   // an S1 operand was taken from the writeback stage
    logic opb_bypass;  // a forwarded operand carried an operation-bound update
    logic load_stall;  // S1 held for one cycle behind a load
    logic opb_update;  // S2 wrote back an extended operation bound
    logic pcc_update;  // instruction fetch advanced the PCC operation bound
    logic trap;        // an exception was raised
  } events_t;

endpackage
