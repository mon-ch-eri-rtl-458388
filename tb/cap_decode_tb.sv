// cap_decode_tb: builds capabilities from known base, top, address and
// operation top with the package's independent encoder and checks that the
// decoder recovers them, for conventional and conditional capabilities, IE = 0
// and IE = 1 (E = 0..2 for conditional ones, larger for conventional), with
// addresses spread over the region so that the c_b/c_t/c_o corrections are
// exercised. Also checks the 48-bit address mask and the op_ok flag.
module cap_decode_tb;
  import moncheri_pkg::*;
  import moncheri_tb_pkg::*;

  cap_t    cap;
  bounds_t bnd;
  int checks = 0, failures = 0, corr_cases = 0;

  cap_decode dut (.cap(cap), .bnd(bnd));

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
    logic [64:0] top, optop;
    logic        ie, cc;
    int          e;
    tcap_t       c;
    for (int i = 0; i < 4000; i++) begin
      cc = (i % 2 == 0);
      ie = $urandom_range(1, 0);
      e  = !ie ? 0 : (cc ? $urandom_range(2, 0) : $urandom_range(30, 0));
      rnd_bounds(ie, e, cc, base, top);
      addr  = base + 64'(({$urandom(), $urandom()}) % (top - {1'b0, base} + 65'd1));
      optop = {1'b0, base} + 65'(({$urandom(), $urandom()}) % (top - {1'b0, base} + 65'd1));
      if (!ie) optop = optop; // byte granular
      else     optop = optop; // byte granular with E <= 2
      if (!cc) optop = top;
      c   = mk_cap(base, top, addr, ie, e, cc ? CP_WBR : CP_NONE, optop, PERMS_RWX);
      cap = c.cap;
      #1;
      if ((addr >> (e + 14)) != (base >> (e + 14))) corr_cases++;
      check(bnd.base == base, $sformatf("base %h exp %h (ie %0d e %0d cc %0d)", bnd.base, base, ie, e, cc));
      check(bnd.top  == top,  $sformatf("top %h exp %h (ie %0d e %0d cc %0d)",  bnd.top, top, ie, e, cc));
      check(bnd.cc == cc, "cc flag");
      check(bnd.addr == addr, "address");
      if (cc) begin
        check(bnd.optop == optop, $sformatf("optop %h exp %h (ie %0d e %0d base %h top %h)", bnd.optop, optop, ie, e, base, top));
        check(bnd.op_ok, "op_ok");
      end
    end
    check(corr_cases > 100, $sformatf("too few correction cases %0d", corr_cases));
    // address mask: a conditional capability ignores cursor[63:48] as address
    c = mk_cap(64'h1000, 65'h1100, 64'h1040, 1'b0, 0, CP_WO, 65'h1010, PERMS_RWX);
    cap = c.cap; #1;
    check(bnd.addr == 64'h1040 && bnd.optop == 65'h1010, "masked address");
    // exponent 3 cannot carry an operation top
    c = mk_cap(64'h10000, 65'h10000 + (65'd5000 << 3), 64'h10000, 1'b1, 3, CP_WBR, 65'h10000, PERMS_RWX);
    cap = c.cap; #1;
    check(!bnd.op_ok && bnd.cc, "op_ok low for E = 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
