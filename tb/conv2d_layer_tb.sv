// conv2d_layer_tb: self-checking test of the Conv2D + ReLU layer.
//
// Applies random normalized images and random 6-bit kernels and biases,
// plus directed cases (a single hot cell in each corner and the middle, all
// weights at +31 for saturation, all negative for ReLU clamping), and
// compares all 128 activations with the integer reference model.
module conv2d_layer_tb;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  logic [NORM_W-1:0]            x_i [N_TC];
  logic [N_CONV_W*PARAM_W-1:0]  w_i;
  logic [N_FILT*PARAM_W-1:0]    b_i;
  logic [ACT_W-1:0]             a_o [N_FLAT];
  int checks = 0, failures = 0;
  int n_sat = 0, n_zero = 0;

  conv2d_layer dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tc_arr_t  x;
  cw_arr_t  w;
  cb_arr_t  b;
  act_arr_t a;

  task automatic apply_and_check(int t);
    for (int i = 0; i < N_TC; i++) x_i[i] = NORM_W'(x[i]);
    for (int i = 0; i < N_CONV_W; i++) w_i[i*PARAM_W +: PARAM_W] = PARAM_W'(w[i]);
    for (int i = 0; i < N_FILT; i++)   b_i[i*PARAM_W +: PARAM_W] = PARAM_W'(b[i]);
    #1;
    a = ref_conv(x, w, b);
    for (int i = 0; i < N_FLAT; i++) begin
      checks++;
      if (int'(a_o[i]) != a[i]) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d act %0d got %0d exp %0d", t, i, a_o[i], a[i]);
      end
      if (a[i] == 63) n_sat++;
      if (a[i] == 0)  n_zero++;
    end
  endtask

  initial begin
    // random
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < N_TC; i++) x[i] = ($urandom_range(3) == 0) ? int'($urandom_range(255)) : int'($urandom_range(20));
      for (int i = 0; i < N_CONV_W; i++) w[i] = rand_param();
      for (int i = 0; i < N_FILT; i++)   b[i] = rand_param();
      apply_and_check(t);
    end
    // single hot cell at several positions, random kernels (padding edges)
    for (int p = 0; p < N_TC; p++) begin
      for (int i = 0; i < N_TC; i++) x[i] = (i == p) ? 200 : 0;
      for (int i = 0; i < N_CONV_W; i++) w[i] = rand_param();
      for (int i = 0; i < N_FILT; i++)   b[i] = 0;
      apply_and_check(100 + p);
    end
    // saturation: all weights +31, large inputs
    for (int i = 0; i < N_TC; i++) x[i] = 255;
    for (int i = 0; i < N_CONV_W; i++) w[i] = 31;
    for (int i = 0; i < N_FILT; i++)   b[i] = 31;
    apply_and_check(200);
    // ReLU: all weights negative
    for (int i = 0; i < N_CONV_W; i++) w[i] = -32;
    for (int i = 0; i < N_FILT; i++)   b[i] = -1;
    apply_and_check(201);
    checks++;
    if (n_sat == 0 || n_zero == 0) begin failures++; $display("FAIL corner cases not reached"); end
    $display("saturated %0d, clamped %0d", n_sat, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
