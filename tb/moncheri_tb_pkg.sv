// moncheri_tb_pkg: helpers shared by the testbenches.
//
// mk_cap builds a compressed capability directly from the numbers it should
// decode to (base, top, address, exponent, conditional permission, operation
// top), written from the format description and independent of the RTL
// encoder. rnd_bounds picks a random representable region.
package moncheri_tb_pkg;
  import moncheri_pkg::*;

  localparam logic [11:0] PERMS_RWX = 12'h00F;  // global, execute, load, store

  function automatic tcap_t mk_cap(logic [63:0] base, logic [64:0] top, logic [63:0] addr,
                                   logic ie, int e, cp_e cp, logic [64:0] optop,
                                   logic [11:0] perms);
    tcap_t c;
    logic [13:0] b_m, t_m, o_m;
    logic [4:0]  oe;
    c = '0;
    c.tag = 1'b1;
    c.cap.p_op = cp;
    c.cap.p_hw = perms;
    c.cap.otype = OTYPE_UNSEALED;
    c.cap.ie = ie;
    b_m = 14'(base >> e);
    t_m = 14'(top >> e);
    o_m = 14'(optop >> e);
    c.cap.t_hi = t_m[11:3];
    c.cap.b_hi = b_m[13:3];
    if (!ie) begin
      c.cap.t_e = t_m[2:0];
      c.cap.b_e = b_m[2:0];
      oe = {o_m[2:0], 2'b00};
    end else begin
      c.cap.t_e = 3'(e >> 3);
      c.cap.b_e = 3'(e);
      oe = 5'(optop & ((65'd1 << (e + 3)) - 1));
    end
    c.cap.cursor = addr;
    if (cp != CP_NONE) c.cap.cursor[63:48] = {o_m[13:3], oe};
    return c;
  endfunction

  // Random region: length in mantissa units below 4096 for IE = 0 and in
  // [4096, 8191] for IE = 1 (bounds aligned to 8 << e). cc limits it to the
  // 48-bit space.
  task automatic rnd_bounds(input logic ie, input int e, input logic cc,
                            output logic [63:0] base, output logic [64:0] top);
    logic [63:0] lm, b;
    if (!ie) lm = 64'($urandom_range(4095, 0));
    else     lm = 64'($urandom_range(8191, 4096)) & ~64'h7;
    b = {$urandom(), $urandom()};
    if (cc) b[63:47] = '0;
    else    b[63]    = 1'b0;
    b = b >> ($urandom_range(40, 0));
    b = (b >> e) << e;
    if (ie) b = (b >> (e + 3)) << (e + 3);
    base = b;
    top  = {1'b0, b} + (65'(lm) << e);
  endtask

endpackage
