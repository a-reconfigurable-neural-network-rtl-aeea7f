// ae_pkg: sizes and fixed-point formats shared by the autoencoder front-end.
//
// The encoder compresses the 48 trigger cells (TCs) of one hexagonal sensor
// module. The cells are arranged as three 4x4 arrays (channels), normalized to
// 8 bits, passed through a Conv2D layer (eight 3x3x3 kernels, 'same' zero
// padding) and a dense layer (128 -> 16). All numbers below marked "paper"
// are the published ones; binary-point positions are this design's choice.
//
// Parameter memory layout (13,728 bits, written as 1,716 bytes, byte k holding
// bits [8k+7:8k]): conv weights (1,296 b), conv biases (48 b), dense weights
// (12,288 b), dense biases (96 b). Every parameter is a 6-bit two's complement
// number; parameter i of a section sits at bits [6i+5:6i] of that section.
package ae_pkg;

  // ---- geometry (paper) ----
  localparam int unsigned N_TC     = 48;  // trigger cells per module
  localparam int unsigned N_CH     = 3;   // three 4x4 arrays
  localparam int unsigned N_ROW    = 4;
  localparam int unsigned N_COL    = 4;
  localparam int unsigned K        = 3;   // 3x3 kernels
  localparam int unsigned N_FILT   = 8;   // eight kernels
  localparam int unsigned N_FLAT   = N_FILT * N_ROW * N_COL;  // 128
  localparam int unsigned N_OUT    = 16;  // dense outputs

  // ---- widths (paper) ----
  localparam int unsigned TC_W     = 22;  // fixed-point TC charge
  localparam int unsigned NORM_W   = 8;   // normalized NN input
  localparam int unsigned PARAM_W  = 6;   // every weight and bias
  localparam int unsigned ACT_W    = 6;   // conv output (768 b / 128)
  localparam int unsigned OUT_W    = 9;   // encoder output
  localparam int unsigned PARAM_BITS = 13728;
  localparam int unsigned BUS_W    = 8;   // parameter write bus
  localparam int unsigned N_BYTES  = PARAM_BITS / BUS_W;  // 1,716

  // ---- derived widths ----
  localparam int unsigned SUM_W    = TC_W + $clog2(N_TC);  // 28, cannot overflow
  localparam int unsigned TRW_W    = 4;   // per-output truncation width code 0..9
  localparam int unsigned PAY_W    = N_OUT * OUT_W;        // 144

  // ---- parameter sections (paper, Fig. 3) ----
  localparam int unsigned N_CONV_W  = N_FILT * N_CH * K * K;  // 216
  localparam int unsigned N_DENSE_W = N_FLAT * N_OUT;         // 2048
  localparam int unsigned CONV_W_OFS  = 0;
  localparam int unsigned CONV_B_OFS  = CONV_W_OFS + N_CONV_W * PARAM_W;   // 1296
  localparam int unsigned DENSE_W_OFS = CONV_B_OFS + N_FILT * PARAM_W;     // 1344
  localparam int unsigned DENSE_B_OFS = DENSE_W_OFS + N_DENSE_W * PARAM_W; // 13632

  // ---- fixed-point formats (this design's choice) ----
  // input  : unsigned, 8 fraction bits (fraction of the module sum)
  // params : signed, 5 fraction bits, range [-1, 1)
  // conv activation : unsigned, 5 fraction bits, range [0, 2)
  // output : unsigned, 5 fraction bits, range [0, 16)
  localparam int unsigned IN_FRAC    = 8;
  localparam int unsigned PARAM_FRAC = 5;
  localparam int unsigned ACT_FRAC   = 5;
  localparam int unsigned OUT_FRAC   = 5;

  typedef logic [NORM_W-1:0]         norm_t;
  typedef logic signed [PARAM_W-1:0] param_t;
  typedef logic [ACT_W-1:0]          act_t;
  typedef logic [OUT_W-1:0]          out_t;

endpackage
