// cap_regfile_tb: random writes on all three ports (including collisions on
// one register and writes to register 0) and random reads on both ports,
// compared with a model array; also checks the reset value.
module cap_regfile_tb;
  import moncheri_pkg::*;

  logic                 clk = 0, rst_n = 0;
  logic [4:0]           ra1, ra2;
  tcap_t                rd1, rd2;
  logic [2:0]           we;
  logic [2:0][4:0]      wa;
  tcap_t [2:0]          wd;
  tcap_t                model [32];
  int checks = 0, failures = 0;

  cap_regfile #(.NWR(3)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = '0; wa = '0; wd = '0; ra1 = '0; ra2 = '0;
    for (int i = 0; i < 32; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 32; r++) begin
      ra1 = 5'(r); #1;
      check(rd1 == '0, "reset value");
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        we[p] = $urandom_range(1, 0);
        wa[p] = ($urandom_range(3, 0) == 0) ? wa[0] : 5'($urandom());
        wd[p] = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
      end
      ra1 = 5'($urandom()); ra2 = 5'($urandom());
      #1;
      check(rd1 == model[ra1] && rd2 == model[ra2], $sformatf("read %0d/%0d", ra1, ra2));
      @(posedge clk); #1;
      for (int p = 0; p < 3; p++)
        if (we[p] && wa[p] != 0) model[wa[p]] = wd[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
