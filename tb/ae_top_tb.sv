// ae_top_tb: end-to-end test of the autoencoder front-end at full size.
//
// 1. Loads a random parameter set through the three copies of the byte port,
//    each on its own copy of the peripheral clock (1,716 writes, counted),
//    with one byte corrupted in one copy (must be outvoted on the way in).
// 2. Streams sensor modules, one per bunch-crossing clock with occasional
//    gaps, through converter, encoder and output truncation, and checks every
//    result exactly two clocks later against the integer reference chain
//    (normalize -> conv -> dense -> truncate/pack): sum, all 16 latent
//    values, payload and payload length.
// 3. Switches the truncation mode on the fly (3/4/5/7/9 bits per output and
//    random mixed widths), reloads a second parameter set (reconfiguration)
//    chosen to drive the layers into saturation, and injects single-event
//    upsets into one parameter-register copy (must be outvoted and repaired)
//    and into one bank of a datapath TMR register (must be masked).
// Each mechanism is counted; one that never happens counts as a failure.
// Conv activation saturation is reported but not required: with normalized
// inputs (summing to at most 1) and parameters below 1 a conv sum stays
// below 2, the top of the activation range, so it cannot occur.
module ae_top_tb;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  localparam int AW = $clog2(N_BYTES);

  logic clk = 0, rst_n = 0;
  logic pclk0 = 0, pclk1 = 0, pclk2 = 0;
  logic [2:0] i2c_clk;
  logic valid_i = 0;
  logic [TC_W-1:0]  tc_i    [N_TC];
  logic [TRW_W-1:0] width_i [N_OUT];
  logic [2:0]       i2c_wr_en = '0;
  logic [AW-1:0]    i2c_addr [3];
  logic [BUS_W-1:0] i2c_data [3];
  logic valid_o;
  logic [PAY_W-1:0] payload_o;
  logic [7:0]       nbits_o;
  logic [SUM_W-1:0] sum_o;
  logic [OUT_W-1:0] latent_o [N_OUT];

  ae_top dut (.*);

  always #12.5 clk = ~clk;       // 40 MHz bunch-crossing clock
  // unrelated peripheral clock, one copy per triplicated byte port, each copy
  // 1 ns later than the previous one
  always #7 pclk0 = ~pclk0;
  initial begin #1; forever #7 pclk1 = ~pclk1; end
  initial begin #2; forever #7 pclk2 = ~pclk2; end
  assign i2c_clk = {pclk2, pclk1, pclk0};

  int checks = 0, failures = 0;
  // mechanism counters
  int n_load = 0, n_modules = 0, n_gap = 0, n_mode [5], n_mixed = 0;
  int n_norm_sat = 0, n_empty = 0, n_act_sat = 0, n_out_sat = 0, n_relu0 = 0;
  int n_param_seu = 0, n_data_seu = 0, n_wr_seu = 0;
  logic [N_OUT*OUT_W:0] seu_val;
  logic [PARAM_BITS-1:0] pseu_val;

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // current parameter set (reference side)
  cw_arr_t cw;
  cb_arr_t cb;
  dw_arr_t dw;
  int      db [NO];
  int      wd [NO];

  task automatic load_params();
    bit [PBITS-1:0] v;
    int bad_byte, bad_copy;
    int cyc = 0;
    v = pack_params(cw, cb, dw, db);
    bad_byte = int'($urandom_range(N_BYTES - 1));
    bad_copy = int'($urandom_range(2));
    @(negedge pclk0);
    for (int k = 0; k < N_BYTES; k++) begin
      i2c_wr_en = '1;
      for (int g = 0; g < 3; g++) begin
        i2c_addr[g] = AW'(k);
        i2c_data[g] = v[k*8 +: 8];
      end
      // an upset in one copy of the write path (one engine copy sends a
      // wrong byte): the voters in front of the registers must mask it
      if (k == bad_byte) i2c_data[bad_copy] = ~v[k*8 +: 8];
      @(negedge pclk0);
      cyc++;
    end
    i2c_wr_en = '0;
    checks++;
    if (cyc != 1716) begin failures++; $display("FAIL load took %0d clocks", cyc); end
    checks++;
    if (dut.params !== PARAM_BITS'(v)) begin failures++; $display("FAIL parameter vector after load"); end
    checks++;
    if (dut.u_params.params_abc_o[bad_copy] !== PARAM_BITS'(v)) begin
      failures++; $display("FAIL write-path upset reached register copy %0d", bad_copy);
    end else n_wr_seu++;
    n_load++;
  endtask

  // pipeline of expected results, index by issue time
  typedef struct {
    bit         valid;
    longint     sum;
    out_arr_t   y;
    bit [143:0] pay;
    int         nbits;
  } exp_t;
  exp_t pipe [2];

  function automatic exp_t model(bit v);
    exp_t e;
    tc_arr_t x;
    act_arr_t a;
    e.valid = v;
    e.sum = 0;
    for (int i = 0; i < NTC; i++) e.sum += tc_i[i];
    for (int i = 0; i < NTC; i++) x[i] = ref_norm(int'(tc_i[i]), e.sum);
    a = ref_conv(x, cw, cb);
    e.y = ref_dense(a, dw, db);
    ref_pack(e.y, wd, e.pay, e.nbits);
    if (v) begin
      for (int i = 0; i < NTC; i++) if (x[i] == 255) n_norm_sat++;
      if (e.sum == 0) n_empty++;
      for (int i = 0; i < NFLAT; i++) if (a[i] == 63) n_act_sat++;
      for (int o = 0; o < NO; o++) begin
        if (e.y[o] == 511) n_out_sat++;
        if (e.y[o] == 0)   n_relu0++;
      end
    end
    return e;
  endfunction

  task automatic make_module(int kind);
    int c0;
    c0 = int'($urandom_range(N_TC - 1));
    for (int i = 0; i < N_TC; i++) begin
      case (kind)
        0: tc_i[i] = ($urandom_range(4) == 0) ? TC_W'($urandom) : TC_W'($urandom_range(3000));
        1: tc_i[i] = (i == c0) ? TC_W'($urandom_range(4194303, 1)) : '0;      // one cell
        2: tc_i[i] = '0;                                                       // empty
        3: tc_i[i] = (i >= 16 && i < 32 && ((i % 4) < 2)) ? TC_W'(4000000) : TC_W'($urandom_range(50)); // cluster
        default: tc_i[i] = ($urandom_range(5) == 0) ? TC_W'($urandom_range(200000)) : '0;
      endcase
    end
  endtask

  task automatic set_widths(int mode);
    int modes [5] = '{3, 4, 5, 7, 9};
    for (int o = 0; o < NO; o++) begin
      wd[o] = (mode < 5) ? modes[mode] : int'($urandom_range(9));
      width_i[o] = TRW_W'(wd[o]);
    end
    if (mode < 5) n_mode[mode]++; else n_mixed++;
  endtask

  // run n modules; the widths apply to the payload of the result being output,
  // so the mode is switched only while the pipeline is empty
  task automatic stream(int n, int kind_mix);
    for (int t = 0; t < n + 2; t++) begin
      bit v;
      v = (t < n) && ($urandom_range(9) != 0);
      if (t < n) make_module(kind_mix < 0 ? int'($urandom_range(4)) : kind_mix);
      valid_i = v;
      if (t >= n) for (int i = 0; i < N_TC; i++) tc_i[i] = '0;
      if (t < n && !v) n_gap++;
      @(posedge clk);
      pipe[1] = pipe[0];
      pipe[0] = model(v);
      #1;
      // result of the module issued two clocks ago
      if (t >= 1) begin
        checks++;
        if (valid_o !== pipe[1].valid) begin failures++; $display("FAIL valid t=%0d", t); end
        if (pipe[1].valid) begin
          n_modules++;
          checks++;
          if (longint'(sum_o) != pipe[1].sum) begin failures++; $display("FAIL sum t=%0d", t); end
          for (int o = 0; o < NO; o++) begin
            checks++;
            if (int'(latent_o[o]) != pipe[1].y[o]) begin
              failures++;
              if (failures < 10) $display("FAIL t=%0d latent %0d got %0d exp %0d", t, o, latent_o[o], pipe[1].y[o]);
            end
          end
          checks++;
          if (payload_o !== pipe[1].pay || int'(nbits_o) != pipe[1].nbits) begin
            failures++; $display("FAIL payload t=%0d", t);
          end
        end
      end
    end
    valid_i = 0;
  endtask

  initial begin
    for (int g = 0; g < 3; g++) begin
      i2c_addr[g] = '0;
      i2c_data[g] = '0;
    end
    for (int i = 0; i < N_TC; i++) tc_i[i] = '0;
    for (int m = 0; m < 5; m++) n_mode[m] = 0;
    pipe[0].valid = 0; pipe[1].valid = 0;
    set_widths(4);
    n_mode[4] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // parameter set A: random
    for (int i = 0; i < NCW; i++) cw[i] = rand_param();
    for (int i = 0; i < NF; i++)  cb[i] = rand_param();
    for (int i = 0; i < NDW; i++) dw[i] = rand_param();
    for (int i = 0; i < NO; i++)  db[i] = rand_param();
    load_params();
    for (int m = 0; m < 6; m++) begin
      @(negedge clk);
      set_widths(m);
      stream(40, -1);
    end

    // upset in one parameter-register copy: masked, then repaired
    pseu_val = dut.params;
    pseu_val[4321] = ~pseu_val[4321];
    force dut.u_params.g_copy[1].q_g = pseu_val;
    #1;
    checks++;
    if (dut.u_params.params_abc_o[1] === dut.params) begin failures++; $display("FAIL param upset not injected"); end
    release dut.u_params.g_copy[1].q_g;
    stream(4, 0);
    @(posedge pclk1); #1;
    checks++;
    if (dut.u_params.params_abc_o[1] !== dut.params) begin failures++; $display("FAIL param upset not repaired"); end
    else n_param_seu++;

    // upset in one bank of the encoder output register: masked
    @(posedge clk); #2;
    seu_val = ~dut.u_encoder.u_reg.r_a;
    force dut.u_encoder.u_reg.r_b = seu_val;
    #1;
    checks++;
    if (dut.u_encoder.u_reg.q !== dut.u_encoder.u_reg.r_a) begin failures++; $display("FAIL datapath upset visible"); end
    else n_data_seu++;
    release dut.u_encoder.u_reg.r_b;

    // reconfiguration: parameter set B, positive conv kernels, drives saturation
    for (int i = 0; i < NCW; i++) cw[i] = int'($urandom_range(31, 12));
    for (int i = 0; i < NF; i++)  cb[i] = int'($urandom_range(31, 0));
    for (int i = 0; i < NDW; i++) dw[i] = rand_param() / 2 + ((i % 16 < 4) ? 12 : 0);
    for (int i = 0; i < NO; i++)  db[i] = rand_param();
    load_params();
    @(negedge clk);
    set_widths(4);
    stream(30, 3);
    stream(30, -1);

    $display("loads=%0d modules=%0d gaps=%0d modes(3,4,5,7,9)=%0d,%0d,%0d,%0d,%0d mixed=%0d",
             n_load, n_modules, n_gap, n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4], n_mixed);
    $display("norm_sat=%0d empty=%0d act_sat=%0d out_sat=%0d relu0=%0d param_seu=%0d data_seu=%0d wr_seu=%0d",
             n_norm_sat, n_empty, n_act_sat, n_out_sat, n_relu0, n_param_seu, n_data_seu, n_wr_seu);
    checks++;
    if (n_load < 2 || n_gap == 0 || n_mixed == 0 || n_norm_sat == 0 || n_empty == 0 ||
        n_out_sat == 0 || n_relu0 == 0 || n_param_seu == 0 || n_data_seu == 0 || n_wr_seu == 0 ||
        n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0 || n_mode[3] == 0 || n_mode[4] == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
