// cap_regfile: merged register file of a CHERI-RISC-V core. Each entry holds
// either a 64-bit integer (tag clear, value in the low cursor bits) or a
// tagged 128-bit capability. Register 0 reads as the null capability.
//
// Two combinational read ports. NWR synchronous write ports; when several
// write the same register in one cycle the highest-numbered port wins. The
// execute block uses port 0 for other parts of the core, port 1 for the
// operation-bound writeback of a base register and port 2 for the
// destination register, so a destination write overrides a bound update.
// All entries reset to the null capability.
module cap_regfile
  import moncheri_pkg::*;
#(
  parameter int unsigned NWR = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [4:0]             ra1,
  input  logic [4:0]             ra2,
  output tcap_t                  rd1,
  output tcap_t                  rd2,
  input  logic [NWR-1:0]         we,
  input  logic [NWR-1:0][4:0]    wa,
  input  tcap_t [NWR-1:0]        wd
);

  tcap_t regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NREGS); i++) regs[i] <= '0;
    end else begin
      for (int p = 0; p < int'(NWR); p++)
        if (we[p] && wa[p] != 5'd0) regs[wa[p]] <= wd[p];
    end
  end

  assign rd1 = (ra1 == 5'd0) ? '0 : regs[ra1];
  assign rd2 = (ra2 == 5'd0) ? '0 : regs[ra2];

endmodule
