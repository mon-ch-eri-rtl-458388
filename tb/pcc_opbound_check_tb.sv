// pcc_opbound_check_tb: fetches through PCCs carrying each execute
// conditional permission. Checks that Write-before-Execute(-Only) refuse
// instructions above the operation top, that Execute-Once refuses an
// instruction fetched twice and advances its bound by one instruction per
// fetch (checked by decoding the returned PCC), and that the conventional
// execute permission and bounds are enforced.
module pcc_opbound_check_tb;
  import moncheri_pkg::*;
  import moncheri_tb_pkg::*;

  tcap_t       pcc, pcc_next;
  logic [63:0] pc;
  logic [3:0]  ilen;
  logic        fault, update;
  cause_e      cause;
  bounds_t     nb;
  int checks = 0, failures = 0;

  pcc_opbound_check dut (.*);
  cap_decode u_ref_dec (.cap(pcc_next.cap), .bnd(nb));

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

  localparam logic [63:0] B = 64'h8000_0000;
  localparam logic [64:0] T = 65'h8000_0400;

  initial begin
    ilen = 4'd4;
    // Write-before-Execute: written region [B, B+0x100)
    for (int k = 0; k < 80; k++) begin
      pc  = B + 64'(k * 4);
      pcc = mk_cap(B, T, B, 1'b0, 0, CP_WBX, {1'b0, B} + 65'h100, PERMS_RWX);
      #1;
      check(fault == (k >= 64), $sformatf("WBX fetch %0d fault %0d", k, fault));
      check(!update, "WBX never advances on fetch");
      if (k >= 64) check(cause == CAUSE_OPBOUND, "WBX cause");
      pcc.cap.p_op = CP_WBXO; #1;
      check(fault == (k >= 64), "WBXO fetch");
    end
    // Execute-Once: walk forward, bound advances each fetch; a second fetch fails
    pcc = mk_cap(B, T, B, 1'b0, 0, CP_XO, {1'b0, B}, PERMS_RWX);
    for (int k = 0; k < 40; k++) begin
      pc = B + 64'(k * 4);
      #1;
      check(!fault && update, $sformatf("XO first fetch %0d", k));
      check(nb.optop == {1'b0, pc} + 65'd4, "XO new bound");
      pcc = pcc_next;
      #1;
      check(fault && cause == CAUSE_OPBOUND, "XO second fetch");
    end
    // conventional checks still apply
    pcc = mk_cap(B, T, B, 1'b0, 0, CP_NONE, T, 12'h004);
    pc = B; #1;
    check(fault && cause == CAUSE_PERM_EXEC, "execute permission");
    pcc = mk_cap(B, T, B, 1'b0, 0, CP_NONE, T, PERMS_RWX);
    pc = 64'(T); #1;
    check(fault && cause == CAUSE_LENGTH, "PCC bounds");
    pc = B + 64'h3FC; #1;
    check(!fault && !update, "last instruction of a plain PCC");
    pcc.tag = 1'b0; #1;
    check(fault && cause == CAUSE_TAG, "PCC tag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
