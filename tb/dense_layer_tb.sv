// dense_layer_tb: self-checking test of the Dense + ReLU layer.
//
// Applies random 6-bit activations, weights and biases, plus directed
// cases (all +31 for output saturation, all negative for ReLU clamping,
// one-hot activations that pick out single weight rows) and compares all 16
// outputs with the integer reference model.
module dense_layer_tb;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  logic [ACT_W-1:0]             a_i [N_FLAT];
  logic [N_DENSE_W*PARAM_W-1:0] w_i;
  logic [N_OUT*PARAM_W-1:0]     b_i;
  logic [OUT_W-1:0]             y_o [N_OUT];
  int checks = 0, failures = 0;
  int n_sat = 0, n_zero = 0;

  dense_layer dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  act_arr_t a;
  dw_arr_t  w;
  int       b [NO];
  out_arr_t y;

  task automatic apply_and_check(int t);
    for (int i = 0; i < N_FLAT; i++)    a_i[i] = ACT_W'(a[i]);
    for (int i = 0; i < N_DENSE_W; i++) w_i[i*PARAM_W +: PARAM_W] = PARAM_W'(w[i]);
    for (int i = 0; i < N_OUT; i++)     b_i[i*PARAM_W +: PARAM_W] = PARAM_W'(b[i]);
    #1;
    y = ref_dense(a, w, b);
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (int'(y_o[o]) != y[o]) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d out %0d got %0d exp %0d", t, o, y_o[o], y[o]);
      end
      if (y[o] == 511) n_sat++;
      if (y[o] == 0)   n_zero++;
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N_FLAT; i++)    a[i] = int'($urandom_range(63));
      for (int i = 0; i < N_DENSE_W; i++) w[i] = rand_param();
      for (int i = 0; i < N_OUT; i++)     b[i] = rand_param();
      apply_and_check(t);
    end
    for (int p = 0; p < N_FLAT; p++) begin
      for (int i = 0; i < N_FLAT; i++) a[i] = (i == p) ? 63 : 0;
      for (int i = 0; i < N_DENSE_W; i++) w[i] = rand_param();
      for (int i = 0; i < N_OUT; i++)     b[i] = 0;
      apply_and_check(200 + p);
    end
    for (int i = 0; i < N_FLAT; i++)    a[i] = 63;
    for (int i = 0; i < N_DENSE_W; i++) w[i] = 31;
    for (int i = 0; i < N_OUT; i++)     b[i] = 31;
    apply_and_check(400);
    for (int i = 0; i < N_DENSE_W; i++) w[i] = -32;
    apply_and_check(401);
    checks++;
    if (n_sat == 0 || n_zero == 0) begin failures++; $display("FAIL corner cases not reached"); end
    $display("saturated %0d, clamped %0d", n_sat, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
