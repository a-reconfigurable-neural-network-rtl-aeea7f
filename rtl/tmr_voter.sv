// tmr_voter: bitwise 2-out-of-3 majority voter.
//
// Each output bit is the value held by at least two of the three inputs, so a
// single upset copy is outvoted. Purely combinational. Used by the simple
// datapath TMR register (tmr_reg) and by the fully triplicated parameter
// registers (i2c_param_regs), as in the triple modular redundancy schemes of
// the design.
module tmr_voter #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y
);
  always_comb y = (a & b) | (a & c) | (b & c);
endmodule
