// dense_layer: the encoder's fully connected layer with ReLU (combinational).
//
// The 128 conv activations (the (8,4,4) map flattened row-major) are
// multiplied by a 128x16 weight matrix and a bias is added to each of the 16
// sums: 2,048 multiply-accumulates, all in parallel, so a new input is taken
// every clock. Weight (i, o) is entry i*16 + o of w_i (the (128,16) matrix
// stored row-major), bias o is entry o of b_i; all are 6-bit two's
// complement numbers.
//
// Arithmetic: activations unsigned with ACT_FRAC fraction bits, parameters
// signed with PARAM_FRAC; the bias is shifted up to the product format.
// ReLU clamps negative sums to 0; the result is truncated to OUT_FRAC fraction
// bits and saturated to the 9-bit output range. Shape, 6-bit parameters and
// 9-bit outputs follow the paper; binary points, truncation and saturation are
// this design's choice.
module dense_layer
  import ae_pkg::*;
#(
  parameter int unsigned ACT_FRAC_P   = ACT_FRAC,
  parameter int unsigned PARAM_FRAC_P = PARAM_FRAC,
  parameter int unsigned OUT_FRAC_P   = OUT_FRAC
) (
  input  logic [ACT_W-1:0]             a_i [N_FLAT],
  input  logic [N_DENSE_W*PARAM_W-1:0] w_i,
  input  logic [N_OUT*PARAM_W-1:0]     b_i,
  output logic [OUT_W-1:0]             y_o [N_OUT]
);
  localparam int unsigned ACC_W = 24;
  localparam int unsigned SHR   = ACT_FRAC_P + PARAM_FRAC_P - OUT_FRAC_P;
  localparam logic signed [ACC_W-1:0] OUT_MAX = ACC_W'((1 << OUT_W) - 1);

  localparam int unsigned PROD_W = ACT_W + PARAM_W + 1;  // 13-bit signed product

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    always_comb begin
      logic signed [ACC_W-1:0]  acc;
      logic signed [ACC_W-1:0]  shifted;
      logic signed [PROD_W-1:0] prod;
      acc = ACC_W'(signed'(b_i[o*PARAM_W +: PARAM_W])) <<< ACT_FRAC_P;
      for (int i = 0; i < N_FLAT; i++) begin
        prod = signed'({1'b0, a_i[i]}) * signed'(w_i[(i*N_OUT + o)*PARAM_W +: PARAM_W]);
        acc  = acc + ACC_W'(prod);
      end
      // ReLU, truncate to OUT_FRAC fraction bits, saturate
      if (acc < 0) shifted = '0;
      else         shifted = acc >>> SHR;
      y_o[o] = (shifted > OUT_MAX) ? '1 : shifted[OUT_W-1:0];
    end
  end
endmodule
