// output_truncation_tb: self-checking test of selective truncation/packing.
//
// Checks the four uniform modes (3, 5, 7, 9 bits per output: 48, 80, 112,
// 144-bit payloads), the 4-bit-per-output mode (64 bits), random mixed
// widths including dropped outputs (width 0) and out-of-range width codes,
// against a bit-by-bit reference packer.
module output_truncation_tb;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  logic [OUT_W-1:0] y_i     [N_OUT];
  logic [TRW_W-1:0] width_i [N_OUT];
  logic [PAY_W-1:0] payload_o;
  logic [7:0]       nbits_o;
  int checks = 0, failures = 0;

  output_truncation dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  out_arr_t   y;
  int         wd [NO];
  bit [143:0] p;
  int         n;

  task automatic apply_and_check(int t, int exp_bits);
    for (int o = 0; o < N_OUT; o++) begin
      y_i[o] = OUT_W'(y[o]);
      width_i[o] = TRW_W'(wd[o]);
    end
    #1;
    ref_pack(y, wd, p, n);
    checks++;
    if (payload_o !== p) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0d payload %h exp %h", t, payload_o, p);
    end
    checks++;
    if (int'(nbits_o) != n || (exp_bits >= 0 && n != exp_bits)) begin
      failures++; $display("FAIL t=%0d nbits %0d exp %0d (%0d)", t, nbits_o, n, exp_bits);
    end
  endtask

  initial begin
    int modes [5] = '{3, 4, 5, 7, 9};
    for (int m = 0; m < 5; m++) begin
      for (int t = 0; t < 20; t++) begin
        for (int o = 0; o < NO; o++) begin y[o] = int'($urandom_range(511)); wd[o] = modes[m]; end
        apply_and_check(m*100 + t, 16 * modes[m]);
      end
    end
    for (int t = 0; t < 300; t++) begin
      for (int o = 0; o < NO; o++) begin y[o] = int'($urandom_range(511)); wd[o] = int'($urandom_range(15)); end
      apply_and_check(1000 + t, -1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
