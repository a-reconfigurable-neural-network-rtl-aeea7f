// conv2d_layer: the encoder's convolutional layer with ReLU (combinational).
//
// Input: the 48 normalized cells as three 4x4 arrays; cell (ch, row, col) is
// x_i[ch*16 + row*4 + col]. Eight 3x3x3 kernels slide over the arrays with
// stride 1 and 'same' zero padding, so every filter yields a 4x4 map. Taps
// that fall outside the 4x4 array are skipped; over the 16 positions this
// leaves 100 taps per input channel, i.e. 3 * 100 * 8 = 2,400 multiply-
// accumulates per inference, the paper's figure for this layer. Every output
// has its own fully parallel multiply-accumulate tree (initiation interval 1).
//
// Parameters come from the parameter registers as one flat vector: weight
// (f, ch, kr, kc) is entry f*27 + ch*9 + kr*3 + kc of w_i, bias f is entry f
// of b_i, each a 6-bit two's complement number. Output activation
// a_o[f*16 + row*4 + col] is the (8,4,4) map flattened row-major, which is the
// dense layer's input order.
//
// Arithmetic: input unsigned with IN_FRAC fraction bits, parameters signed
// with PARAM_FRAC, so the products carry IN_FRAC+PARAM_FRAC fraction bits; the
// bias is shifted up to match. ReLU clamps negative sums to 0, then the sum is
// truncated (shifted right) to ACT_FRAC fraction bits and saturated to the
// 6-bit activation range. The layer shape, 6-bit parameters and 6-bit
// activations follow the paper; the binary points, truncation and saturation
// are this design's choice (the paper does not give them).
module conv2d_layer
  import ae_pkg::*;
#(
  parameter int unsigned IN_FRAC_P    = IN_FRAC,
  parameter int unsigned PARAM_FRAC_P = PARAM_FRAC,
  parameter int unsigned ACT_FRAC_P   = ACT_FRAC
) (
  input  logic [NORM_W-1:0]          x_i [N_TC],
  input  logic [N_CONV_W*PARAM_W-1:0] w_i,
  input  logic [N_FILT*PARAM_W-1:0]   b_i,
  output logic [ACT_W-1:0]           a_o [N_FLAT]
);
  localparam int unsigned ACC_W = 24;
  localparam int unsigned SHR   = IN_FRAC_P + PARAM_FRAC_P - ACT_FRAC_P;
  localparam logic signed [ACC_W-1:0] ACT_MAX = ACC_W'((1 << ACT_W) - 1);

  localparam int unsigned PROD_W = NORM_W + PARAM_W + 1;  // 15-bit signed product

  for (genvar f = 0; f < N_FILT; f++) begin : g_filt
    for (genvar r = 0; r < N_ROW; r++) begin : g_row
      for (genvar c = 0; c < N_COL; c++) begin : g_col
        always_comb begin
          logic signed [ACC_W-1:0]  acc;
          logic signed [ACC_W-1:0]  shifted;
          logic signed [PROD_W-1:0] prod;
          acc = ACC_W'(signed'(b_i[f*PARAM_W +: PARAM_W])) <<< IN_FRAC_P;
          for (int ch = 0; ch < N_CH; ch++) begin
            for (int kr = 0; kr < K; kr++) begin
              for (int kc = 0; kc < K; kc++) begin
                // zero padding: taps outside the 4x4 array contribute nothing
                if (r + kr >= 1 && r + kr <= N_ROW && c + kc >= 1 && c + kc <= N_COL) begin
                  prod = signed'({1'b0, x_i[ch*16 + (r+kr-1)*4 + (c+kc-1)]})
                       * signed'(w_i[(f*27 + ch*9 + kr*3 + kc)*PARAM_W +: PARAM_W]);
                  acc  = acc + ACC_W'(prod);
                end
              end
            end
          end
          // ReLU, truncate to ACT_FRAC fraction bits, saturate
          if (acc < 0) shifted = '0;
          else         shifted = acc >>> SHR;
          a_o[f*16 + r*4 + c] = (shifted > ACT_MAX) ? '1 : shifted[ACT_W-1:0];
        end
      end
    end
  end
endmodule
