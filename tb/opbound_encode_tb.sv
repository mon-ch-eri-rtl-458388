// opbound_encode_tb: for random conditional capabilities (IE = 0, and IE = 1
// with E = 0..2) writes a random new operation top with the encoder and
// compares the cursor fields with the ones the independent reference encoder
// produces, then checks that all other fields are unchanged.
module opbound_encode_tb;
  import moncheri_pkg::*;
  import moncheri_tb_pkg::*;

  cap_t        cin, cout;
  logic [64:0] new_optop;
  int checks = 0, failures = 0;

  opbound_encode dut (.cap_in(cin), .new_optop(new_optop), .cap_out(cout));

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
    logic [63:0] base, addr;
    logic [64:0] top, o0, o1;
    logic        ie;
    int          e;
    tcap_t       c0, c1;
    for (int i = 0; i < 3000; i++) begin
      ie = $urandom_range(1, 0);
      e  = ie ? $urandom_range(2, 0) : 0;
      rnd_bounds(ie, e, 1'b1, base, top);
      addr = base;
      o0 = {1'b0, base};
      o1 = {1'b0, base} + 65'(({$urandom(), $urandom()}) % (top - {1'b0, base} + 65'd1));
      c0 = mk_cap(base, top, addr, ie, e, CP_WBR, o0, PERMS_RWX);
      c1 = mk_cap(base, top, addr, ie, e, CP_WBR, o1, PERMS_RWX);
      cin = c0.cap; new_optop = o1;
      #1;
      check(cout.cursor[63:48] == c1.cap.cursor[63:48],
            $sformatf("O fields %h exp %h (ie %0d e %0d o %h)", cout.cursor[63:48], c1.cap.cursor[63:48], ie, e, o1));
      check(cout[127:64] == cin[127:64] && cout.cursor[47:0] == cin.cursor[47:0], "other fields");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
