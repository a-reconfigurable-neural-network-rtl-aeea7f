// ae_top: reconfigurable autoencoder front-end for one detector sensor module.
//
// Every bunch crossing (40 MHz clock) the 48 trigger-cell charges of a sensor
// module (22-bit fixed point) enter. The converter sums them and normalizes
// each cell to an 8-bit fraction of the sum (clock 1); the encoder network,
// a Conv2D layer of eight 3x3x3 kernels and a 128->16 dense layer, both with
// ReLU, turns the normalized image into 16 9-bit latent values (clock 2).
// The output truncation stage keeps a configurable number of most significant
// bits of each value and packs them into a 48..144-bit payload. The module sum
// travels with the payload so the energy scale can be restored downstream.
// Latency is two clocks (50 ns) and a new module is accepted every clock.
//
// The 2,288 network parameters (13,728 bits) live in the I2C peripheral's
// triplicated, self-correcting registers and are written byte by byte
// (1,716 writes) on the peripheral clock; the serial I2C protocol engine that
// drives the byte port is outside this block. Because the whole peripheral is
// triplicated, the byte port comes in three copies (index 0..2), one per
// register copy, each with its own clock; a system without a triplicated
// engine ties the three copies together outside. The per-copy register
// contents are not brought out (only the voted parameters are used), so that
// output of the peripheral stays open. Parameters are meant to be loaded
// while the datapath output is not in use; the two clock domains are not
// synchronized.
//
// Ports: clk/rst_n (bunch-crossing clock, synchronous active-low reset),
// valid_i/tc_i (input module), width_i (per-output truncation widths, 0..9),
// i2c_clk/i2c_wr_en/i2c_addr/i2c_data (parameter byte port, three copies),
// valid_o,
// payload_o, nbits_o (payload length), sum_o (module sum of the same
// crossing), latent_o (the 16 untruncated encoder outputs).
//
// Structure, sizes, latency and rate follow the paper, as does the
// triplicated parameter port (separate inputs and clocks per copy); port
// naming, the valid flag, the width configuration port and the raw latent
// output are this design's choices.
module ae_top
  import ae_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid_i,
  input  logic [TC_W-1:0]           tc_i    [N_TC],
  input  logic [TRW_W-1:0]          width_i [N_OUT],
  input  logic [2:0]                i2c_clk,
  input  logic [2:0]                i2c_wr_en,
  input  logic [$clog2(N_BYTES)-1:0] i2c_addr [3],
  input  logic [BUS_W-1:0]          i2c_data [3],
  output logic                      valid_o,
  output logic [PAY_W-1:0]          payload_o,
  output logic [7:0]                nbits_o,
  output logic [SUM_W-1:0]          sum_o,
  output logic [OUT_W-1:0]          latent_o [N_OUT]
);
  // ---------------- parameter storage (I2C peripheral) ----------------
  logic [PARAM_BITS-1:0]      params;

  i2c_param_regs u_params (
    .clk_i        (i2c_clk),
    .rst_n        (rst_n),
    .wr_en_i      (i2c_wr_en),
    .addr_i       (i2c_addr),
    .data_i       (i2c_data),
    .params_abc_o (),
    .params_o     (params)
  );

  // ---------------- clock 1: converter ----------------
  logic              conv_valid;
  logic [NORM_W-1:0] norm [N_TC];
  logic [SUM_W-1:0]  conv_sum;

  converter u_converter (
    .clk     (clk),
    .rst_n   (rst_n),
    .valid_i (valid_i),
    .tc_i    (tc_i),
    .valid_o (conv_valid),
    .norm_o  (norm),
    .sum_o   (conv_sum)
  );

  // ---------------- clock 2: encoder ----------------
  encoder u_encoder (
    .clk      (clk),
    .rst_n    (rst_n),
    .valid_i  (conv_valid),
    .x_i      (norm),
    .params_i (params),
    .valid_o  (valid_o),
    .y_o      (latent_o)
  );

  // the module sum follows the encoder by one clock
  tmr_reg #(.W(SUM_W)) u_sum_reg (
    .clk(clk), .rst_n(rst_n), .en(1'b1), .d(conv_sum), .q(sum_o)
  );

  // ---------------- output truncation and packing ----------------
  output_truncation u_trunc (
    .y_i       (latent_o),
    .width_i   (width_i),
    .payload_o (payload_o),
    .nbits_o   (nbits_o)
  );
endmodule
