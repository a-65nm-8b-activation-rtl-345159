// Full-size end-to-end testbench of cim_macro: default parameters, M = 1152.
// Loads weight and activation vectors (random, and structured cases that
// reach full scale), runs CiM cycles and compares every ADC result with
// the integer reference clamp(floor(sum_j A_j*W_j / (128*M)), -128, 127),
// set to 0 for a negative sum when ReLU is on.  It also checks the
// fine-tuned output against round(gain*x + offset), and the timing:
// adc_valid 36 clocks after start (22 after an early stop), out_valid one
// later, and one MAC every 45 clocks with start held.  Each mechanism is
// counted: early stop, full conversion, ReLU-off negative output, ADC
// clipping at full scale, fine-tune saturation, back-to-back cycles.
module cim_macro_full_tb;
  import cim_pkg::*;
  localparam int M = 1152;
  localparam int TRIALS = 4;
  localparam int AW = $clog2(M);

  logic clk = 0, rst_n = 0;
  logic w_wr_en = 0, a_wr_en = 0, relu_en = 1, start = 0;
  logic [AW-1:0] w_wr_addr = '0, a_wr_addr = '0;
  logic signed [7:0] w_wr_data = '0, a_wr_data = '0;
  logic signed [15:0] ft_gain = 16'sd256, ft_offset = '0;
  logic busy, adc_valid, early_stop, out_valid;
  logic signed [7:0] adc_out, mac_out;
  logic [3:0] n_cmp;
  phase_t phase;

  int checks = 0, failures = 0;
  int wv [M], av [M];
  int n_early = 0, n_full = 0, n_neg_norelu = 0, n_clip = 0, n_ft_sat = 0, n_b2b = 0;

  cim_macro dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(string tag, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", tag, got, exp_v);
    end
  endtask

  function automatic int floor_div(longint a, longint b);
    longint q = a / b;
    if ((a % b != 0) && (a < 0)) q = q - 1;
    return int'(q);
  endfunction

  function automatic int ref_adc(logic relu);
    longint mac = 0;
    int r;
    for (int j = 0; j < M; j++) mac += longint'(av[j]) * longint'(wv[j]);
    r = floor_div(mac, 128 * M);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    if (relu && r < 0) r = 0;
    return r;
  endfunction

  function automatic int ref_ft(int x, int g, int o);
    int e = int'($floor((real'(g) * real'(x) + real'(o)) / 256.0 + 0.5));
    return (e > 127) ? 127 : (e < -128) ? -128 : e;
  endfunction

  task automatic load(int mode);
    for (int j = 0; j < M; j++) begin
      unique case (mode)
        0: begin wv[j] = int'($urandom_range(0, 255)) - 128; av[j] = int'($urandom_range(0, 255)) - 128; end
        1: begin wv[j] = -128; av[j] = -128; end                         // +full scale
        2: begin wv[j] = 127;  av[j] = -128; end                         // -full scale
        3: begin wv[j] = int'($urandom_range(0, 255)) - 128; av[j] = wv[j]; end   // positive
        default: begin wv[j] = int'($urandom_range(0, 255)) - 128; av[j] = -wv[j]; end // negative
      endcase
      if (av[j] > 127) av[j] = 127;
    end
    for (int j = 0; j < M; j++) begin
      @(negedge clk);
      w_wr_en = 1; w_wr_addr = AW'(j); w_wr_data = 8'(wv[j]);
      a_wr_en = 1; a_wr_addr = AW'(j); a_wr_data = 8'(av[j]);
    end
    @(negedge clk);
    w_wr_en = 0; a_wr_en = 0;
  endtask

  // one CiM cycle from standby, with latency checks
  task automatic run_one(logic relu, int g, int o);
    int lat = 0, e, ef;
    relu_en = relu; ft_gain = 16'(g); ft_offset = 16'(o);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 0;   // counts rising edges after the one that samples start
    while (!adc_valid) begin @(negedge clk); lat++; end
    e = ref_adc(relu);
    expect_eq("adc_out", int'(adc_out), e);
    expect_eq("early_stop", int'(early_stop), int'(relu && ref_adc(1'b0) < 0));
    expect_eq("latency", lat, early_stop ? 22 : 36);
    expect_eq("n_cmp", int'(n_cmp), early_stop ? 1 : 8);
    if (early_stop) n_early++; else n_full++;
    if (!relu && e < 0) n_neg_norelu++;
    if (ref_adc(1'b0) == 127 || ref_adc(1'b0) == -128) n_clip++;
    @(negedge clk);
    ef = ref_ft(e, g, o);
    expect_eq("out_valid", int'(out_valid), 1);
    expect_eq("mac_out", int'(mac_out), ef);
    if (ef == 127 || ef == -128) n_ft_sat++;
    while (busy) @(negedge clk);
  endtask

  task automatic require(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // structured cases
    load(1); run_one(1'b1, 256, 0);
    load(2); run_one(1'b1, 256, 0);
    load(2); run_one(1'b0, 256, 0);
    load(3); run_one(1'b1, 1024, 0);
    load(4); run_one(1'b1, 256, 0);
    load(4); run_one(1'b0, 300, -200);
    // random
    for (int t = 0; t < TRIALS; t++) begin
      load(t % 5 == 1 ? 3 : 0);
      run_one(1'($urandom_range(0, 1)), int'($urandom_range(128, 512)), int'($urandom_range(0, 1023)) - 512);
    end
    // back-to-back with start held: same vectors, 45-clock period
    begin
      int e, last = -1, cyc = 0, seen = 0;
      load(3);
      relu_en = 1; ft_gain = 16'sd256; ft_offset = '0;
      e = ref_adc(1'b1);
      @(negedge clk) start = 1;
      while (seen < 3) begin
        @(negedge clk);
        cyc++;
        if (adc_valid) begin
          expect_eq("back-to-back adc_out", int'(adc_out), e);
          if (last >= 0) begin
            expect_eq("MAC period", cyc - last, 45);
            n_b2b++;
          end
          last = cyc;
          seen++;
        end
        if (cyc > 500) break;
      end
      start = 0;
      while (busy) @(negedge clk);
    end
    require("ReLU early stop", n_early);
    require("full conversion", n_full);
    require("ReLU off, negative output", n_neg_norelu);
    require("ADC clipping at full scale", n_clip);
    require("fine-tune saturation", n_ft_sat);
    require("back-to-back MACs", n_b2b);
    $display("early=%0d full=%0d neg_norelu=%0d clip=%0d ft_sat=%0d b2b=%0d",
             n_early, n_full, n_neg_norelu, n_clip, n_ft_sat, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
