// converter_tb: self-checking test of the normalizing converter.
//
// Drives one module per clock (random dense, sparse, single-cell, all-zero
// and all-full-scale patterns) and checks, one clock later, the 28-bit sum
// and all 48 normalized values against the integer reference
// floor(256*tc/sum) limited to 255. The valid flag checks the one-clock
// latency and the rate of one module per clock.
module converter_tb;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  logic [TC_W-1:0]   tc_i [N_TC];
  logic [NORM_W-1:0] norm_o [N_TC];
  logic [SUM_W-1:0]  sum_o;
  int checks = 0, failures = 0;
  int n_sat = 0, n_zero = 0;

  converter dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected values of the module presented in the previous clock
  int     exp_norm [N_TC];
  longint exp_sum;
  bit     exp_valid;

  task automatic make_pattern(int kind);
    for (int i = 0; i < N_TC; i++) begin
      case (kind)
        0: tc_i[i] = TC_W'($urandom);                                   // dense
        1: tc_i[i] = ($urandom_range(9) == 0) ? TC_W'($urandom) : '0;  // sparse
        2: tc_i[i] = (i == 17) ? TC_W'($urandom_range(4194303, 1)) : '0; // one cell
        3: tc_i[i] = '0;                                                // empty
        4: tc_i[i] = '1;                                                // full scale
        default: tc_i[i] = TC_W'($urandom_range(1000));                  // small
      endcase
    end
  endtask

  initial begin
    for (int i = 0; i < N_TC; i++) tc_i[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_valid = 0;
    for (int t = 0; t < 200; t++) begin
      int kind;
      kind = (t < 6) ? t : int'($urandom_range(5));
      make_pattern(kind);
      valid_i = (t % 7 != 3);
      @(posedge clk);
      // compute expectation for this module
      exp_sum = 0;
      for (int i = 0; i < N_TC; i++) exp_sum += tc_i[i];
      for (int i = 0; i < N_TC; i++) exp_norm[i] = ref_norm(int'(tc_i[i]), exp_sum);
      exp_valid = valid_i;
      #1;
      checks++;
      if (valid_o !== exp_valid) begin failures++; $display("FAIL valid t=%0d", t); end
      checks++;
      if (longint'(sum_o) != exp_sum) begin
        failures++; $display("FAIL sum t=%0d got %0d exp %0d", t, sum_o, exp_sum);
      end
      for (int i = 0; i < N_TC; i++) begin
        checks++;
        if (int'(norm_o[i]) != exp_norm[i]) begin
          failures++;
          if (failures < 10) $display("FAIL norm t=%0d i=%0d got %0d exp %0d", t, i, norm_o[i], exp_norm[i]);
        end
        if (exp_norm[i] == 255 && kind == 2) n_sat++;
      end
      if (exp_sum == 0) n_zero++;
    end
    checks++;
    if (n_sat == 0 || n_zero == 0) begin failures++; $display("FAIL corner cases not reached"); end
    $display("saturated cells %0d, empty modules %0d", n_sat, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
