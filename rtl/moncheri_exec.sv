// moncheri_exec: execute and writeback stages of a CHERI-RISC-V pipeline
// extended with conditional capabilities (operation bounds).
//
// Stages
//   S1 (ALU stage)  operands are read from the merged register file with
//                   forwarding, the base capability is decoded, and the
//                   conditional permission is checked: opbound_check decides
//                   whether the access is allowed by the operation bound and
//                   whether it extends it; CSetOpBounds is evaluated; the
//                   instruction's PCC fetch check (pcc_opbound_check) runs here
//                   and an Execute-Once PCC advances its bound as S1 retires.
//   S2 (memory)     the conventional tag/seal/permission/bounds check
//                   (cap_check) completes, any violation raises the exception,
//                   the data request goes to memory, and an extended operation
//                   top is re-encoded into the base capability (opbound_encode).
//   S3 (writeback)  load data (returned one cycle after the request) or the
//                   CSetOpBounds result is written to rd, and the capability
//                   with the extended operation bound is written back to rs1.
// Bypass: a store through a conditional capability changes its rs1 register,
// so an immediately following access through the same register would see a
// stale operation bound. Every S1 operand is forwarded from S2 and S3,
// including the updated base capability, so such sequences run without a
// stall. Only a load followed by a use of its destination stalls S1 one cycle.
// Exceptions: the faulting instruction in S2 is dropped (no memory access, no
// writeback), the younger instruction in S1 is flushed and trap_valid pulses
// for one cycle with the cause and PC; the supplier of instructions redirects.
//
// Interfaces
//   in_*      instruction supply with valid/ready; instr is a 32-bit RV64
//             encoding handled by cc_decode; others raise an illegal trap.
//   ext_wr_*  register writes from the rest of the core (only while the
//             pipeline is empty).
//   pcc_wr_*  loads the PCC (done by jumps in a complete core).
//   dmem_*    one request per cycle from S2, aligned 64-bit data with byte
//             enables, read data on dmem_rdata in the following cycle.
// The stage split and the bypass follow the published pipeline description;
// the interface signals, the stall on load use and the trap handshake are
// this design's own.
module moncheri_exec
  import moncheri_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // instruction supply
  input  logic        in_valid,
  input  logic [31:0] in_instr,
  input  logic [63:0] in_pc,
  output logic        in_ready,
  // register and PCC writes from the rest of the core
  input  logic        ext_wr_valid,
  input  logic [4:0]  ext_wr_idx,
  input  tcap_t       ext_wr_data,
  input  logic        pcc_wr_valid,
  input  tcap_t       pcc_wr_data,
  // data memory
  output logic        dmem_req_valid,
  output logic        dmem_req_we,
  output logic [63:0] dmem_req_addr,
  output logic [7:0]  dmem_req_be,
  output logic [63:0] dmem_req_wdata,
  input  logic [63:0] dmem_rdata,
  // exceptions, retirement and events
  output logic        trap_valid,
  output cause_e      trap_cause,
  output logic [63:0] trap_pc,
  output logic        retire_valid,
  output logic [63:0] retire_pc,
  output tcap_t       pcc_out,
  output events_t     events
);

  // ------------------------------------------------------------------ state
  logic        s1_valid;
  logic [63:0] s1_pc;
  uop_t        s1_uop;

  logic        s2_valid;
  logic [63:0] s2_pc;
  uop_t        s2_uop;
  tcap_t       s2_cap;
  bounds_t     s2_bnd;
  logic [63:0] s2_addr;
  logic [3:0]  s2_size;
  logic [63:0] s2_wdata;
  logic        s2_pcc_fault;
  cause_e      s2_pcc_cause;
  logic        s2_opb_fault, s2_opb_upd, s2_misalign;
  logic [64:0] s2_new_optop;
  tcap_t       s2_cso_res;
  logic        s2_cso_fault;
  cause_e      s2_cso_cause;

  logic        s3_valid;
  logic [63:0] s3_pc;
  logic        s3_rd_we, s3_is_load, s3_ub_we, s3_uns;
  logic [4:0]  s3_rd, s3_ub;
  tcap_t       s3_rd_val, s3_ub_val;
  logic [2:0]  s3_off;
  logic [1:0]  s3_szl;

  tcap_t       pcc;

  // -------------------------------------------------------- register file
  tcap_t             rf_rd1, rf_rd2;
  logic [2:0]        rf_we;
  logic [2:0][4:0]   rf_wa;
  tcap_t [2:0]       rf_wd;
  tcap_t             s3_ld_val, s3_rd_final;

  cap_regfile #(.NWR(3)) u_rf (
    .clk, .rst_n,
    .ra1(s1_uop.rs1), .ra2(s1_uop.rs2), .rd1(rf_rd1), .rd2(rf_rd2),
    .we(rf_we), .wa(rf_wa), .wd(rf_wd)
  );

  // ------------------------------------------------------------- S2 logic
  logic        s2_is_mem, s2_fault, s2_cv_fault;
  cause_e      s2_cv_cause, s2_cause;
  cap_t        s2_upd_cap;
  acc_e        s2_acc;

  assign s2_is_mem = (s2_uop.kind == UOP_LOAD) || (s2_uop.kind == UOP_STORE);
  assign s2_acc    = (s2_uop.kind == UOP_STORE) ? ACC_STORE : ACC_LOAD;

  cap_check u_cv (
    .cap(s2_cap), .bnd(s2_bnd), .addr(s2_addr), .size(s2_size), .acc(s2_acc),
    .fault(s2_cv_fault), .cause(s2_cv_cause)
  );

  opbound_encode u_enc (.cap_in(s2_cap.cap), .new_optop(s2_new_optop), .cap_out(s2_upd_cap));

  always_comb begin
    s2_fault = 1'b1;
    if (s2_pcc_fault)                     s2_cause = s2_pcc_cause;
    else if (s2_uop.illegal)              s2_cause = CAUSE_ILLEGAL;
    else if (s2_is_mem && s2_cv_fault)    s2_cause = s2_cv_cause;
    else if (s2_is_mem && s2_misalign)    s2_cause = CAUSE_MISALIGN;
    else if (s2_is_mem && s2_opb_fault)   s2_cause = CAUSE_OPBOUND;
    else if (s2_uop.kind == UOP_CSETOPB && s2_cso_fault) s2_cause = s2_cso_cause;
    else begin
      s2_fault = 1'b0;
      s2_cause = CAUSE_NONE;
    end
    s2_fault = s2_fault && s2_valid;
  end

  logic s2_ok, s2_rd_we, s2_ub_we;
  assign s2_ok    = s2_valid && !s2_fault;
  assign s2_rd_we = s2_ok && (s2_uop.kind == UOP_CSETOPB || s2_uop.kind == UOP_LOAD) && s2_uop.rd != 5'd0;
  assign s2_ub_we = s2_ok && s2_is_mem && s2_opb_upd && s2_uop.rs1 != 5'd0;

  assign dmem_req_valid = s2_ok && s2_is_mem;
  assign dmem_req_we    = (s2_uop.kind == UOP_STORE);
  assign dmem_req_addr  = {s2_addr[63:3], 3'b000};
  assign dmem_req_be    = 8'(((16'd1 << s2_size) - 16'd1) << s2_addr[2:0]);
  assign dmem_req_wdata = s2_wdata << {s2_addr[2:0], 3'b000};

  assign trap_valid = s2_fault;
  assign trap_cause = s2_cause;
  assign trap_pc    = s2_pc;

  // ------------------------------------------------------------- S3 logic
  logic [63:0] ld_raw, ld_ext;
  always_comb begin
    ld_raw = dmem_rdata >> {s3_off, 3'b000};
    unique case (s3_szl)
      2'd0:    ld_ext = s3_uns ? {56'b0, ld_raw[7:0]}  : {{56{ld_raw[7]}},  ld_raw[7:0]};
      2'd1:    ld_ext = s3_uns ? {48'b0, ld_raw[15:0]} : {{48{ld_raw[15]}}, ld_raw[15:0]};
      2'd2:    ld_ext = s3_uns ? {32'b0, ld_raw[31:0]} : {{32{ld_raw[31]}}, ld_raw[31:0]};
      default: ld_ext = ld_raw;
    endcase
    s3_ld_val            = '0;
    s3_ld_val.cap.cursor = ld_ext;
    s3_rd_final          = s3_is_load ? s3_ld_val : s3_rd_val;
  end

  always_comb begin
    rf_we = {s3_valid && s3_rd_we, s3_valid && s3_ub_we, ext_wr_valid};
    rf_wa = {s3_rd, s3_ub, ext_wr_idx};
    rf_wd = {s3_rd_final, s3_ub_val, ext_wr_data};
  end

  assign retire_valid = s3_valid;
  assign retire_pc    = s3_pc;

  // ------------------------------------------------------------- S1 logic
  logic  s1_use1, s1_use2, stall, flush;
  tcap_t op1, op2;
  logic  fw1_s2, fw1_s3, fw2_s2, fw2_s3, fw_opb;

  // Operand forwarding: S2 results first, then S3, then the register file.
  // Within a stage the destination write takes precedence over the bound update.
  function automatic tcap_t fwd(input logic [4:0] r, input tcap_t rf_val,
                                output logic from_s2, output logic from_s3,
                                output logic opb);
    from_s2 = 1'b0; from_s3 = 1'b0; opb = 1'b0;
    if (r == 5'd0) return '0;
    if (s2_rd_we && s2_uop.rd == r) begin
      from_s2 = 1'b1; return s2_cso_res;
    end
    if (s2_ub_we && s2_uop.rs1 == r) begin
      from_s2 = 1'b1; opb = 1'b1; return '{tag: s2_cap.tag, cap: s2_upd_cap};
    end
    if (s3_valid && s3_rd_we && s3_rd == r) begin
      from_s3 = 1'b1; return s3_rd_final;
    end
    if (s3_valid && s3_ub_we && s3_ub == r) begin
      from_s3 = 1'b1; opb = 1'b1; return s3_ub_val;
    end
    return rf_val;
  endfunction

  logic opb1, opb2;
  always_comb begin
    s1_use1 = s1_valid && s1_uop.kind != UOP_NONE;
    s1_use2 = s1_valid && (s1_uop.kind == UOP_STORE || s1_uop.kind == UOP_CSETOPB);
    op1 = fwd(s1_uop.rs1, rf_rd1, fw1_s2, fw1_s3, opb1);
    op2 = fwd(s1_uop.rs2, rf_rd2, fw2_s2, fw2_s3, opb2);
    fw_opb = (s1_use1 && opb1) || (s1_use2 && opb2);
    stall = s2_ok && s2_uop.kind == UOP_LOAD && s2_uop.rd != 5'd0 &&
            ((s1_use1 && s1_uop.rs1 == s2_uop.rd) || (s1_use2 && s1_uop.rs2 == s2_uop.rd));
    flush = s2_fault;
  end

  bounds_t     s1_bnd;
  logic [63:0] s1_addr;
  logic [3:0]  s1_size;
  acc_e        s1_acc;
  logic        s1_opb_fault, s1_opb_upd;
  logic [64:0] s1_new_optop;
  tcap_t       s1_cso_res;
  logic        s1_cso_fault;
  cause_e      s1_cso_cause;
  logic        s1_pcc_fault, s1_pcc_upd;
  cause_e      s1_pcc_cause;
  tcap_t       s1_pcc_next;

  cap_decode u_dec (.cap(op1.cap), .bnd(s1_bnd));

  always_comb begin
    s1_addr = s1_bnd.addr + {{52{s1_uop.imm[11]}}, s1_uop.imm};
    if (s1_bnd.cc) s1_addr[63:48] = '0;
    s1_size = 4'(5'd1 << s1_uop.size_log2);
    s1_acc  = (s1_uop.kind == UOP_STORE) ? ACC_STORE : ACC_LOAD;
  end

  opbound_check u_opb (
    .p_op(op1.cap.p_op), .bnd(s1_bnd), .addr(s1_addr), .size(s1_size), .acc(s1_acc),
    .fault(s1_opb_fault), .update(s1_opb_upd), .new_optop(s1_new_optop)
  );

  csetopbounds_unit u_cso (
    .cs1(op1), .len(op2.cap.cursor), .variant(s1_uop.cp),
    .cd(s1_cso_res), .fault(s1_cso_fault), .cause(s1_cso_cause)
  );

  pcc_opbound_check u_pcc (
    .pcc(pcc), .pc(s1_pc), .ilen(4'd4),
    .fault(s1_pcc_fault), .cause(s1_pcc_cause), .update(s1_pcc_upd), .pcc_next(s1_pcc_next)
  );

  assign in_ready = !stall && !flush;
  assign pcc_out  = pcc;

  always_comb begin
    events            = '0;
    events.bypass_s2  = !stall && ((s1_use1 && fw1_s2) || (s1_use2 && fw2_s2));
    events.bypass_s3  = !stall && ((s1_use1 && fw1_s3) || (s1_use2 && fw2_s3));
    events.opb_bypass = !stall && s1_valid && fw_opb;
    events.load_stall = s1_valid && stall && !flush;
    events.opb_update = s2_ub_we;
    events.pcc_update = s1_valid && !stall && !flush && s1_pcc_upd;
    events.trap       = s2_fault;
  end

  uop_t dec_uop;
  cc_decode u_decode (.instr(in_instr), .uop(dec_uop));

  // ------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_pc <= '0; s1_uop <= '0;
      s2_valid <= 1'b0; s2_pc <= '0; s2_uop <= '0; s2_cap <= '0; s2_bnd <= '0;
      s2_addr <= '0; s2_size <= '0; s2_wdata <= '0;
      s2_pcc_fault <= 1'b0; s2_pcc_cause <= CAUSE_NONE;
      s2_opb_fault <= 1'b0; s2_opb_upd <= 1'b0; s2_misalign <= 1'b0; s2_new_optop <= '0;
      s2_cso_res <= '0; s2_cso_fault <= 1'b0; s2_cso_cause <= CAUSE_NONE;
      s3_valid <= 1'b0; s3_pc <= '0; s3_rd_we <= 1'b0; s3_is_load <= 1'b0;
      s3_ub_we <= 1'b0; s3_uns <= 1'b0; s3_rd <= '0; s3_ub <= '0;
      s3_rd_val <= '0; s3_ub_val <= '0; s3_off <= '0; s3_szl <= '0;
      pcc <= '0;
    end else begin
      // S3
      s3_valid   <= s2_ok;
      s3_pc      <= s2_pc;
      s3_rd_we   <= s2_rd_we;
      s3_rd      <= s2_uop.rd;
      s3_rd_val  <= s2_cso_res;
      s3_is_load <= (s2_uop.kind == UOP_LOAD);
      s3_ub_we   <= s2_ub_we;
      s3_ub      <= s2_uop.rs1;
      s3_ub_val  <= '{tag: s2_cap.tag, cap: s2_upd_cap};
      s3_off     <= s2_addr[2:0];
      s3_szl     <= s2_uop.size_log2;
      s3_uns     <= s2_uop.unsigned_ld;
      // S2
      s2_valid <= s1_valid && !stall && !flush;
      if (!stall) begin
        s2_pc        <= s1_pc;
        s2_uop       <= s1_uop;
        s2_cap       <= op1;
        s2_bnd       <= s1_bnd;
        s2_addr      <= s1_addr;
        s2_size      <= s1_size;
        s2_wdata     <= op2.cap.cursor;
        s2_pcc_fault <= s1_pcc_fault;
        s2_pcc_cause <= s1_pcc_cause;
        s2_opb_fault <= s1_opb_fault;
        s2_opb_upd   <= s1_opb_upd;
        s2_misalign  <= (s1_addr[2:0] & 3'(s1_size - 4'd1)) != 3'd0;
        s2_new_optop <= s1_new_optop;
        s2_cso_res   <= s1_cso_res;
        s2_cso_fault <= s1_cso_fault;
        s2_cso_cause <= s1_cso_cause;
      end
      // S1
      if (flush)                     s1_valid <= 1'b0;
      else if (!stall) begin
        s1_valid <= in_valid;
        if (in_valid) begin
          s1_pc <= in_pc;
          s1_uop <= dec_uop;
        end
      end
      // PCC
      if (pcc_wr_valid)                                        pcc <= pcc_wr_data;
      else if (s1_valid && !stall && !flush && s1_pcc_upd && !s1_pcc_fault) pcc <= s1_pcc_next;
    end
  end

  // ------------------------------------------------------------ assertions
  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ext_wr_valid |-> !(s1_valid || s2_valid || s3_valid))
    else $error("register write from outside while the pipeline is busy");
  a_no_req_on_trap: assert property (@(posedge clk) disable iff (!rst_n)
    trap_valid |-> !dmem_req_valid);
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready && !flush) |=> in_valid && $stable(in_instr) && $stable(in_pc))
    else $error("instruction supply changed while held");

endmodule
