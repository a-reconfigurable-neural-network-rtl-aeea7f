// converter: normalizes the 48 trigger-cell charges of one sensor module.
//
// Each bunch crossing the 48 22-bit fixed-point TC charges are summed and
// every charge is divided by that sum, giving its fraction of the module
// energy. The fraction is truncated to an 8-bit unsigned number with 8
// fraction bits (q = floor(256 * tc / sum), limited to 255 for the one case
// tc == sum). The sum itself is passed on so that the back end can undo the
// normalization. The division is a 9-step restoring divider per cell: the
// quotient never exceeds 256, so nine compare-and-subtract stages suffice.
// A module with zero total charge gives all-zero outputs.
//
// Timing: one bunch-crossing clock of latency, a new module every clock
// (initiation interval 1). Outputs are held in TMR-protected registers.
//
// From the paper: 48 inputs of 22 bits, sum-based normalization, 8-bit
// outputs, one clock of latency, simple TMR on registers. This design's
// choices: the 8-bit binary point, truncation (floor), saturation at 255, the
// zero-sum rule, the valid flag and the synchronous reset.
module converter
  import ae_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_i,
  input  logic [TC_W-1:0]     tc_i   [N_TC],
  output logic                valid_o,
  output logic [NORM_W-1:0]   norm_o [N_TC],
  output logic [SUM_W-1:0]    sum_o
);
  localparam int unsigned QW = NORM_W + 1;             // quotient bits (<= 256)
  localparam int unsigned NW = SUM_W + NORM_W;         // numerator/divisor width

  logic [SUM_W-1:0]  sum;
  logic [NORM_W-1:0] norm [N_TC];

  // tc * 2^8 / sum, restoring division, saturated to 8 bits
  function automatic logic [NORM_W-1:0] normalize(input logic [TC_W-1:0] tc,
                                                  input logic [SUM_W-1:0] s);
    logic [NW-1:0] rem;
    logic [QW-1:0] q;
    rem = NW'(tc) << NORM_W;
    q   = '0;
    for (int i = QW - 1; i >= 0; i--) begin
      if (rem >= (NW'(s) << i)) begin
        rem  = rem - (NW'(s) << i);
        q[i] = 1'b1;
      end
    end
    if (s == '0)          return '0;
    else if (q[QW-1])     return '1;
    else                  return q[NORM_W-1:0];
  endfunction

  always_comb begin
    sum = '0;
    for (int i = 0; i < N_TC; i++) sum = sum + SUM_W'(tc_i[i]);
  end

  always_comb begin
    for (int i = 0; i < N_TC; i++) norm[i] = normalize(tc_i[i], sum);
  end

  // pack, register with TMR, unpack
  logic [N_TC*NORM_W-1:0] norm_flat_d, norm_flat_q;
  always_comb begin
    for (int i = 0; i < N_TC; i++) norm_flat_d[i*NORM_W +: NORM_W] = norm[i];
  end

  tmr_reg #(.W(N_TC*NORM_W + SUM_W + 1)) u_reg (
    .clk(clk), .rst_n(rst_n), .en(1'b1),
    .d({valid_i, sum, norm_flat_d}),
    .q({valid_o, sum_o, norm_flat_q})
  );

  always_comb begin
    for (int i = 0; i < N_TC; i++) norm_o[i] = norm_flat_q[i*NORM_W +: NORM_W];
  end
endmodule
