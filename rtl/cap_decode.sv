// cap_decode: decompresses a 128-bit capability into base, top and, for a
// conditional capability, the operation top.
//
// Bounds follow CHERI Concentrate with mantissa width 14. With IE = 0 the
// exponent is zero and T[2:0], B[2:0] come from T_E, B_E; with IE = 1 the
// exponent is {T_E, B_E} and the three low mantissa bits are zero. The two top
// bits of T are rebuilt as B[13:12] + L_carry + L_msb. Each bound is the
// address bits above E+14, corrected by c_t / c_b / c_o from the comparison of
// A3 = a[E+13:E+11] and the bound's top three mantissa bits with R = B3 - 1,
// followed by the 14 mantissa bits and E low bits.
// A conditional capability (p_op != 0) uses only a[47:0] as its address and
// stores the operation top O in the cursor's top 16 bits: O[13:3] and O_E.
// With IE = 0, O[2:0] = O_E[4:2]; with IE = 1, O[2:0] = O_E[E+2:E] and the E
// low bits of the operation top are O_E[E-1:0]. Exponents above 2 cannot hold
// an operation top; op_ok is then low.
// The top[64] fix-up for near-full address spaces follows CHERI ISAv9 and is
// applied to conventional capabilities only; for conditional capabilities all
// results are cut to the 48-bit space (49 bits for top and operation top).
// Purely combinational.
module cap_decode
  import moncheri_pkg::*;
(
  input  cap_t    cap,
  output bounds_t bnd
);

  logic [5:0]  e;
  logic [13:0] t_m, b_m, o_m;
  logic        lcarry, lmsb;
  logic [63:0] a;
  logic [2:0]  a3, r3;
  logic [4:0]  o_e;
  logic [10:0] o_hi;
  logic [1:0]  ct_sel, cb_sel, co_sel;
  logic [64:0] a_top, top_v, base_v, op_v, low_o;

  function automatic logic [1:0] corr(logic [2:0] a3f, logic [2:0] x3, logic [2:0] r);
    // 2'b00: 0, 2'b01: +1, 2'b11: -1
    logic al, xl;
    al = a3f < r;
    xl = x3 < r;
    if (al == xl)      return 2'b00;
    else if (xl)       return 2'b01;
    else               return 2'b11;
  endfunction

  function automatic logic [64:0] add_corr(logic [64:0] v, logic [1:0] c);
    if (c == 2'b01)      return v + 65'd1;
    else if (c == 2'b11) return v - 65'd1;
    else                 return v;
  endfunction

  always_comb begin
    bnd   = '0;
    o_hi  = cap.cursor[63:53];
    o_e   = cap.cursor[52:48];
    bnd.cc = (cap.p_op != CP_NONE);
    a     = bnd.cc ? {16'b0, cap.cursor[47:0]} : cap.cursor;

    if (!cap.ie) begin
      e      = 6'd0;
      t_m    = {2'b00, cap.t_hi, cap.t_e};
      b_m    = {cap.b_hi, cap.b_e};
      o_m    = {o_hi, o_e[4:2]};
      lmsb   = 1'b0;
      lcarry = (t_m[11:0] < b_m[11:0]);
    end else begin
      e      = ({cap.t_e, cap.b_e} > 6'(MAX_E)) ? 6'(MAX_E) : {cap.t_e, cap.b_e};
      t_m    = {2'b00, cap.t_hi, 3'b000};
      b_m    = {cap.b_hi, 3'b000};
      o_m    = {o_hi, 3'b000};
      unique case (e)
        6'd0:    o_m[2:0] = o_e[2:0];
        6'd1:    o_m[2:0] = o_e[3:1];
        6'd2:    o_m[2:0] = o_e[4:2];
        default: o_m[2:0] = 3'b000;
      endcase
      lmsb   = 1'b1;
      lcarry = (t_m[11:3] < b_m[11:3]);
    end
    t_m[13:12] = b_m[13:12] + {1'b0, lcarry} + {1'b0, lmsb};

    bnd.e     = e;
    bnd.op_ok = bnd.cc && (!cap.ie || e <= 6'(CC_MAX_E));
    bnd.addr  = a;

    a3     = 3'(a >> (e + 6'd11));
    r3     = b_m[13:11] - 3'd1;
    ct_sel = corr(a3, t_m[13:11], r3);
    cb_sel = corr(a3, b_m[13:11], r3);
    co_sel = corr(a3, o_m[13:11], r3);

    a_top  = 65'(a >> (e + 6'(MW)));
    top_v  = (add_corr(a_top, ct_sel) << (e + 6'(MW))) | (65'(t_m) << e);
    base_v = (add_corr(a_top, cb_sel) << (e + 6'(MW))) | (65'(b_m) << e);

    low_o = '0;
    if (cap.ie) begin
      unique case (e)
        6'd1:    low_o = 65'(o_e[0]);
        6'd2:    low_o = 65'(o_e[1:0]);
        default: low_o = '0;
      endcase
    end
    op_v = (add_corr(a_top, co_sel) << (e + 6'(MW))) | (65'(o_m) << e) | low_o;

    if (bnd.cc) begin
      bnd.base  = {16'b0, base_v[47:0]};
      bnd.top   = {16'b0, top_v[48:0]};
      bnd.optop = {16'b0, op_v[48:0]};
    end else begin
      // CHERI ISAv9: keep top within one address-space length of base
      if ((e < 6'(MAX_E - 1)) && ((top_v[64:63] - {1'b0, base_v[63]}) > 2'd1))
        top_v[64] = ~top_v[64];
      bnd.base  = base_v[63:0];
      bnd.top   = top_v;
      bnd.optop = top_v;
    end
  end

endmodule
