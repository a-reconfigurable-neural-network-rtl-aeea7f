// i2c_param_regs_tb: self-checking test of the triplicated parameter store.
//
// Loads all 1,716 bytes with random data, one byte per peripheral clock, and
// checks that the load takes exactly 1,716 clocks and that the voted output
// and all three copies hold the expected 13,728-bit vector. Then rewrites
// random single bytes, checks that out-of-range addresses are ignored, and
// injects upsets: a bit forced wrong in one copy must never show on the
// voted output and must be repaired by that copy's next clock edge (voted
// feedback), without any new write.
module i2c_param_regs_tb;
  import ae_pkg::*;

  localparam int AW = $clog2(N_BYTES);
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [AW-1:0]    addr = '0;
  logic [BUS_W-1:0] data = '0;
  logic [AW-1:0]    addr3 [3];
  logic [BUS_W-1:0] data3 [3];
  logic [PARAM_BITS-1:0] params_abc_o [3];
  logic [PARAM_BITS-1:0] params_o;
  logic [PARAM_BITS-1:0] exp_v;
  int checks = 0, failures = 0;
  int n_corrected = 0;

  always_comb begin
    for (int g = 0; g < 3; g++) begin addr3[g] = addr; data3[g] = data; end
  end

  i2c_param_regs dut (
    .clk_i({clk_c, clk_b, clk}), .rst_n(rst_n), .wr_en_i({3{wr_en}}),
    .addr_i(addr3), .data_i(data3), .params_abc_o(params_abc_o), .params_o(params_o)
  );

  // three separately generated (but aligned) clocks, one per copy, so the
  // simulator keeps the three register banks apart
  logic clk_b = 0, clk_c = 0;
  always #5 clk = ~clk;
  always #5 clk_b = ~clk_b;
  always #5 clk_c = ~clk_c;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(string what);
    checks++;
    if (params_o !== exp_v) begin failures++; $display("FAIL %s: voted output", what); end
    for (int g = 0; g < 3; g++) begin
      checks++;
      if (params_abc_o[g] !== exp_v) begin failures++; $display("FAIL %s: copy %0d", what, g); end
    end
  endtask

  task automatic write_byte(int a, logic [7:0] d);
    wr_en = 1; addr = AW'(a); data = d;
    @(posedge clk); #1;
    wr_en = 0;
  endtask

  initial begin
    int cycles;
    logic [7:0] b;
    exp_v = '0;
    repeat (2) @(posedge clk); #1;
    check_all("reset");
    rst_n = 1;
    // full load
    cycles = 0;
    for (int k = 0; k < N_BYTES; k++) begin
      b = 8'($urandom);
      exp_v[k*8 +: 8] = b;
      wr_en = 1; addr = AW'(k); data = b;
      @(posedge clk); #1;
      cycles++;
    end
    wr_en = 0;
    checks++;
    if (cycles != 1716) begin failures++; $display("FAIL load took %0d clocks", cycles); end
    check_all("full load");
    // random rewrites
    for (int t = 0; t < 200; t++) begin
      int k;
      k = int'($urandom_range(N_BYTES - 1));
      b = 8'($urandom);
      exp_v[k*8 +: 8] = b;
      write_byte(k, b);
      check_all("rewrite");
    end
    // out-of-range addresses do nothing
    for (int a = N_BYTES; a < (1 << AW); a += 37) write_byte(a, 8'hA5);
    check_all("out of range");
    // upsets: flip one bit in one copy, check masking and autocorrection
    for (int t = 0; t < 6; t++) begin
      int g;
      g = t % 3;
      case (t)
        0: force dut.g_copy[0].q_g[5]     = ~exp_v[5];
        1: force dut.g_copy[1].q_g[7000]  = ~exp_v[7000];
        2: force dut.g_copy[2].q_g[13727] = ~exp_v[13727];
        3: force dut.g_copy[0].q_g[1300]  = ~exp_v[1300];
        4: force dut.g_copy[1].q_g[100]   = ~exp_v[100];
        default: force dut.g_copy[2].q_g[9999] = ~exp_v[9999];
      endcase
      #1;
      checks++;
      if (params_o !== exp_v) begin failures++; $display("FAIL upset %0d visible on voted output", t); end
      checks++;
      if (params_abc_o[g] === exp_v) begin failures++; $display("FAIL upset %0d not injected", t); end
      case (t)
        0: release dut.g_copy[0].q_g[5];
        1: release dut.g_copy[1].q_g[7000];
        2: release dut.g_copy[2].q_g[13727];
        3: release dut.g_copy[0].q_g[1300];
        4: release dut.g_copy[1].q_g[100];
        default: release dut.g_copy[2].q_g[9999];
      endcase
      @(posedge clk); #1;
      if (params_abc_o[g] === exp_v) n_corrected++;
      check_all("after autocorrection");
    end
    checks++;
    if (n_corrected != 6) begin failures++; $display("FAIL corrected %0d of 6 upsets", n_corrected); end
    $display("upsets corrected: %0d", n_corrected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
