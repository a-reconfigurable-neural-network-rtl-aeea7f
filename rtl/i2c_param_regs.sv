// i2c_param_regs: the I2C peripheral's storage for the 13,728 network
// parameter bits, fully triplicated with voted feedback (autocorrection).
//
// The parameters are written one byte per peripheral clock over an 8-bit
// write port: byte k (0..1715) holds bits [8k+7:8k] of the parameter vector,
// so a complete load takes 1,716 clocks. Layout of the vector: see ae_pkg.
//
// Radiation hardening follows the full-module triplication scheme: there are
// three copies (A, B, C) of the register bank, each with its own clock,
// inputs and next-state logic. The next-state logic of copy X takes its own
// inputs and the feedback of its own register (hold, or load the addressed
// byte). All three next-state results go to three majority voters, one in
// front of each register bank. A bit flipped by an upset in one bank is
// therefore outvoted at that bank's next clock edge and rewritten with the
// correct value: errors cannot accumulate, provided the peripheral clock
// keeps running (it must be clocked periodically, also while idle).
//
// Interface: per copy g (index 0..2 = A..C) clk_i[g], wr_en_i[g], addr_i[g]
// and data_i[g]; a write happens on the rising clock edge with wr_en high.
// Addresses at or above 1,716 are ignored. rst_n (synchronous, active low)
// clears all three banks. params_abc_o gives the three banks' outputs as in
// the triplication scheme; params_o is their bitwise majority, used by the
// datapath.
//
// From the paper: 13,728 bits, 8-bit input bus, 1,716 clocks per load, full
// module triplication with autocorrection. This design's choices: the byte
// address port (the serial I2C protocol layer in front of it is not part of
// this module), the byte order, reset to zero and the voted params_o output.
module i2c_param_regs
  import ae_pkg::*;
#(
  parameter int unsigned NBITS = PARAM_BITS
) (
  input  logic [2:0]                 clk_i,
  input  logic                       rst_n,
  input  logic [2:0]                 wr_en_i,
  input  logic [$clog2(NBITS/BUS_W)-1:0] addr_i [3],
  input  logic [BUS_W-1:0]           data_i [3],
  output logic [NBITS-1:0]           params_abc_o [3],
  output logic [NBITS-1:0]           params_o
);
  localparam int unsigned NB = NBITS / BUS_W;
  localparam int unsigned AW = $clog2(NB);

  logic [NBITS-1:0] q   [3];   // register bank outputs, copies A..C
  logic [NBITS-1:0] nxt [3];   // next-state logic outputs, copies A..C

  for (genvar g = 0; g < 3; g++) begin : g_copy
    logic [NBITS-1:0] q_g;    // this copy's register bank
    logic [NBITS-1:0] nxt_g;  // this copy's next-state logic
    logic [NBITS-1:0] vote_g; // this copy's voter

    // next-state logic of copy g: per byte, load on an address match, else hold
    for (genvar k = 0; k < NB; k++) begin : g_byte
      assign nxt_g[k*BUS_W +: BUS_W] =
          (wr_en_i[g] && addr_i[g] == AW'(k)) ? data_i[g] : q_g[k*BUS_W +: BUS_W];
    end
    assign nxt[g] = nxt_g;

    tmr_voter #(.W(NBITS)) u_vote (
      .a(nxt[0]), .b(nxt[1]), .c(nxt[2]), .y(vote_g)
    );

    always_ff @(posedge clk_i[g]) begin
      if (!rst_n) q_g <= '0;
      else        q_g <= vote_g;
    end

    assign q[g]            = q_g;
    assign params_abc_o[g] = q_g;
  end

  tmr_voter #(.W(NBITS)) u_vote_out (
    .a(q[0]), .b(q[1]), .c(q[2]), .y(params_o)
  );
endmodule
