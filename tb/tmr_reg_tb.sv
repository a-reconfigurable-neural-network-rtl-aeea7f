// tmr_reg_tb: self-checking test of the simple TMR datapath register.
//
// Checks one-clock latency of random data, the enable and reset, and that an
// upset forced into any single bank does not reach the voted output, then
// that the next load overwrites the upset bank.
module tmr_reg_tb;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, en = 0;
  logic [W-1:0] d = '0, q;
  int checks = 0, failures = 0;

  tmr_reg #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .en(en), .d(d), .q(q));

  always #5 clk = ~clk;

  task automatic check(logic [W-1:0] exp, string what);
    checks++;
    if (q !== exp) begin
      failures++;
      $display("FAIL %s: q=%h expected %h", what, q, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v, prev;
    repeat (2) @(posedge clk);
    #1 check('0, "reset");
    rst_n = 1; en = 1;
    prev = '0;
    for (int i = 0; i < 50; i++) begin
      v = W'($urandom);
      d = v;
      @(posedge clk); #1;
      check(v, "latency 1");
    end
    // enable low holds
    prev = q; en = 0; d = ~prev;
    @(posedge clk); #1 check(prev, "hold");
    // upset each bank in turn
    for (int b = 0; b < 3; b++) begin
      v = q;
      case (b)
        0: force dut.r_a = ~v;
        1: force dut.r_b = ~v;
        default: force dut.r_c = ~v;
      endcase
      #1 check(v, "masked upset");
      @(posedge clk); #1 check(v, "masked upset after edge");
      case (b)
        0: release dut.r_a;
        1: release dut.r_b;
        default: release dut.r_c;
      endcase
      en = 1; d = W'($urandom);
      @(posedge clk); #1 check(d, "reload after upset");
      checks++;
      if (dut.r_a !== d || dut.r_b !== d || dut.r_c !== d) begin
        failures++;
        $display("FAIL bank not rewritten");
      end
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
