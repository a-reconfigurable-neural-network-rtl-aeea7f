// encoder_tb: self-checking test of the one-clock Conv2D/Dense encoder.
//
// A new random image is applied every clock, with a fresh random parameter
// set every 8 images; each result is checked one clock later against the
// integer reference (ref_conv then ref_dense), so both the one-clock latency
// and the one-image-per-clock rate are exercised. The valid flag must follow
// the input valid with the same latency.
module encoder_tb;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  logic [NORM_W-1:0]     x_i [N_TC];
  logic [PARAM_BITS-1:0] params_i;
  logic [OUT_W-1:0]      y_o [N_OUT];
  int checks = 0, failures = 0;

  encoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tc_arr_t  x;
  cw_arr_t  cw;
  cb_arr_t  cb;
  dw_arr_t  dw;
  int       db [NO];
  out_arr_t y;
  bit       ev;

  initial begin
    for (int i = 0; i < N_TC; i++) x_i[i] = '0;
    params_i = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (valid_o !== 1'b0) begin failures++; $display("FAIL valid after reset"); end
    rst_n = 1;
    for (int t = 0; t < 64; t++) begin
      if (t % 8 == 0) begin
        for (int i = 0; i < NCW; i++) cw[i] = rand_param();
        for (int i = 0; i < NF; i++)  cb[i] = rand_param();
        for (int i = 0; i < NDW; i++) dw[i] = rand_param();
        for (int i = 0; i < NO; i++)  db[i] = rand_param();
        params_i = pack_params(cw, cb, dw, db);
      end
      for (int i = 0; i < N_TC; i++) begin
        x[i] = ($urandom_range(2) == 0) ? int'($urandom_range(255)) : int'($urandom_range(12));
        x_i[i] = NORM_W'(x[i]);
      end
      valid_i = (t % 5 != 2);
      ev = valid_i;
      y = ref_dense(ref_conv(x, cw, cb), dw, db);
      @(posedge clk); #1;
      checks++;
      if (valid_o !== ev) begin failures++; $display("FAIL valid t=%0d", t); end
      for (int o = 0; o < N_OUT; o++) begin
        checks++;
        if (int'(y_o[o]) != y[o]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d out %0d got %0d exp %0d", t, o, y_o[o], y[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
