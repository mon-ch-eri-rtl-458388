// csetopbounds_unit_tb: applies every CSetOpBounds variant to random
// conventional capabilities and checks, by decoding the result, that the
// conditional permission is set, the operation top equals base + length and
// base, top and address are unchanged. Then checks each refusal: length past
// top, untagged or sealed source, growing an existing bound, changing the
// variant of a conditional capability, an exponent above 2 and an address
// outside the 48-bit space; and that shrinking a bound is accepted.
module csetopbounds_unit_tb;
  import moncheri_pkg::*;
  import moncheri_tb_pkg::*;

  tcap_t       cs1, cd;
  logic [63:0] len;
  cp_e         variant;
  logic        fault;
  cause_e      cause;
  bounds_t     rb;
  int checks = 0, failures = 0;

  csetopbounds_unit dut (.*);
  cap_decode u_ref_dec (.cap(cd.cap), .bnd(rb));

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
    logic [63:0] base, addr, l;
    logic [64:0] top;
    logic        ie;
    int          e;
    for (int i = 0; i < 3000; i++) begin
      ie = $urandom_range(1, 0);
      e  = ie ? $urandom_range(2, 0) : 0;
      rnd_bounds(ie, e, 1'b1, base, top);
      addr = base + 64'($urandom_range(31, 0));
      if ({1'b0, addr} > top) addr = base;
      cs1 = mk_cap(base, top, addr, ie, e, CP_NONE, top, PERMS_RWX);
      variant = cp_e'($urandom_range(7, 1));
      l = 64'(({$urandom(), $urandom()}) % (top - {1'b0, base} + 65'd1));
      len = l;
      #1;
      check(!fault, $sformatf("unexpected fault %s", cause.name()));
      check(cd.tag && cd.cap.p_op == variant, "variant set");
      check(rb.base == base && rb.top == top && rb.addr == addr, "bounds and address kept");
      check(rb.optop == {1'b0, base} + 65'(l), $sformatf("operation top %h exp %h", rb.optop, {1'b0, base} + 65'(l)));
      // shrink is fine, grow is refused
      cs1 = cd;
      len = l >> 1; #1;
      check(!fault && rb.optop == {1'b0, base} + 65'(l >> 1), "shrink");
      len = l + 64'd1; #1;
      check(fault, "grow refused");
      check(cause == (({1'b0, base} + 65'(l) + 65'd1 > top) ? CAUSE_LENGTH : CAUSE_OPBOUND), "grow cause");
      len = l >> 1;
      variant = (variant == CP_XO) ? CP_WBR : cp_e'(variant + 1); #1;
      check(fault && cause == CAUSE_OPBOUND, "variant change refused");
    end
    cs1 = mk_cap(64'h1000, 65'h1100, 64'h1000, 1'b0, 0, CP_NONE, 65'h1100, PERMS_RWX);
    variant = CP_WBR;
    len = 64'h101; #1;
    check(fault && cause == CAUSE_LENGTH, "past top");
    len = 64'h10;
    cs1.tag = 1'b0; #1;
    check(fault && cause == CAUSE_TAG, "untagged");
    cs1.tag = 1'b1; cs1.cap.otype = 18'd5; #1;
    check(fault && cause == CAUSE_SEAL, "sealed");
    cs1 = mk_cap(64'h0001_0000_1000, 65'h0001_0000_1100, 64'h0001_0000_1000, 1'b0, 0, CP_NONE, 65'h0, PERMS_RWX);
    cs1.cap.cursor[63:48] = 16'h0001; #1;
    check(fault && cause == CAUSE_LENGTH, "address above 48 bits");
    cs1 = mk_cap(64'h10000, 65'h10000 + (65'd5000 << 3), 64'h10000, 1'b1, 3, CP_NONE, 65'h0, PERMS_RWX); #1;
    check(fault && cause == CAUSE_LENGTH, "exponent 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
