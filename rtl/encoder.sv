// encoder: the neural-network shape encoder, Conv2D -> ReLU -> Flatten ->
// Dense -> ReLU, computed in one clock.
//
// The 48 normalized cells enter as three 4x4 arrays; conv2d_layer produces an
// 8x4x4 map of 6-bit activations, flattening is a fixed wiring (row-major over
// filter, row, column) and dense_layer reduces the 128 values to 16 9-bit
// outputs. Both layers are fully parallel (4,448 multiply-accumulates per
// inference), so one module is accepted every bunch-crossing clock, and the
// 16 results are held in a TMR-protected register: latency one clock.
//
// params_i is the whole 13,728-bit parameter vector from the parameter
// registers; the layer sections are sliced here with the offsets of ae_pkg.
// Parameters are quasi-static: they must not be rewritten while results are
// being used. valid_i is carried alongside the data to valid_o.
//
// Layer shapes, parameter counts and widths, one-clock latency and simple TMR
// follow the paper; parameter ordering, fixed-point binary points and the
// valid flag are this design's choice.
module encoder
  import ae_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid_i,
  input  logic [NORM_W-1:0]     x_i [N_TC],
  input  logic [PARAM_BITS-1:0] params_i,
  output logic                  valid_o,
  output logic [OUT_W-1:0]      y_o [N_OUT]
);
  logic [ACT_W-1:0] act [N_FLAT];
  logic [OUT_W-1:0] y   [N_OUT];

  conv2d_layer u_conv (
    .x_i (x_i),
    .w_i (params_i[CONV_W_OFS +: N_CONV_W*PARAM_W]),
    .b_i (params_i[CONV_B_OFS +: N_FILT*PARAM_W]),
    .a_o (act)
  );

  dense_layer u_dense (
    .a_i (act),
    .w_i (params_i[DENSE_W_OFS +: N_DENSE_W*PARAM_W]),
    .b_i (params_i[DENSE_B_OFS +: N_OUT*PARAM_W]),
    .y_o (y)
  );

  logic [N_OUT*OUT_W-1:0] y_flat_d, y_flat_q;
  always_comb begin
    for (int o = 0; o < N_OUT; o++) y_flat_d[o*OUT_W +: OUT_W] = y[o];
  end

  tmr_reg #(.W(N_OUT*OUT_W + 1)) u_reg (
    .clk(clk), .rst_n(rst_n), .en(1'b1),
    .d({valid_i, y_flat_d}),
    .q({valid_o, y_flat_q})
  );

  always_comb begin
    for (int o = 0; o < N_OUT; o++) y_o[o] = y_flat_q[o*OUT_W +: OUT_W];
  end
endmodule
