// opbound_encode: writes a new operation top into a conditional capability.
//
// The operation top o is stored like the base: its mantissa O = o[E+13:E]
// goes to O[13:3] (cursor[63:53]) and O_E (cursor[52:48]). With IE = 0 the
// exponent is zero and O_E = {O[2:0], 2'b00}; with IE = 1 and E <= 2,
// O_E[E+2:0] = o[E+2:0], which holds both O[2:0] and the E low bits of o
// that a byte-granular bound needs. The address o[47:E+14] is not stored: the
// decoder rebuilds it from the cursor address with its own correction c_o, so
// any o between base and top of the capability round-trips. Exponents above 2
// leave O_E zero (such a capability never receives an operation bound).
// Purely combinational; all other fields pass through unchanged.
module opbound_encode
  import moncheri_pkg::*;
(
  input  cap_t        cap_in,
  input  logic [64:0] new_optop,
  output cap_t        cap_out
);

  logic [5:0]  e;
  logic [13:0] o_m;
  logic [4:0]  o_e;

  always_comb begin
    e   = cap_in.ie ? {cap_in.t_e, cap_in.b_e} : 6'd0;
    o_m = 14'(new_optop >> e);
    o_e = '0;
    if (!cap_in.ie) begin
      o_e = {o_m[2:0], 2'b00};
    end else begin
      unique case (e)
        6'd0:    o_e = {2'b00, new_optop[2:0]};
        6'd1:    o_e = {1'b0,  new_optop[3:0]};
        6'd2:    o_e = new_optop[4:0];
        default: o_e = '0;
      endcase
    end
    cap_out               = cap_in;
    cap_out.cursor[63:53] = o_m[13:3];
    cap_out.cursor[52:48] = o_e;
  end

endmodule
