// Workload testbench: one output channel of a 3x3 convolution with 128
// input channels (fan-in 3*3*128 = 1152 = M), run on cim_macro at its
// default size, followed by the output-based fine-tune calibration.
//
// The filter is loaded once (row j = c*9 + dy*3 + dx).  For each of the
// 6x6 output pixels of a 6x6x128 input map with zero padding, the 1152
// activations of its receptive field are written and one CiM cycle is run.
// Inputs are non-negative (outputs of a previous ReLU layer).  Filter and
// map are built to correlate (channel sign against a left-right ramp), so
// the pixels span a wide range of outputs of both signs.  Pass 1 (ReLU off) checks every ADC result against the integer
// reference and gathers the statistics of the ADC output (mu1, sigma1) and
// of the ideal real-valued output MAC/(128*M) (mu0, sigma0).  From them it
// sets gain = sigma0/sigma1 and offset = mu0 - gain*mu1 in Q8.8.  Pass 2
// (ReLU on) checks the ReLU outputs, the early stops and the fine-tuned
// outputs, then reports the mean error before and after fine-tune.
module cim_conv_tb;
  import cim_pkg::*;
  localparam int M = 1152;
  localparam int C = 128, H = 6, W = 6;
  localparam int AW = $clog2(M);

  logic clk = 0, rst_n = 0;
  logic w_wr_en = 0, a_wr_en = 0, relu_en = 0, start = 0;
  logic [AW-1:0] w_wr_addr = '0, a_wr_addr = '0;
  logic signed [7:0] w_wr_data = '0, a_wr_data = '0;
  logic signed [15:0] ft_gain = 16'sd256, ft_offset = '0;
  logic busy, adc_valid, early_stop, out_valid;
  logic signed [7:0] adc_out, mac_out;
  logic [3:0] n_cmp;
  phase_t phase;

  int checks = 0, failures = 0, n_early = 0, n_pos = 0;
  int filt [M];
  int fmap [C][H][W];
  int act [M];
  int adc1 [H*W];
  real ideal [H*W];

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

  function automatic longint dot();
    longint s = 0;
    for (int j = 0; j < M; j++) s += longint'(filt[j]) * longint'(act[j]);
    return s;
  endfunction

  task automatic gather(int oy, int ox);
    for (int c = 0; c < C; c++)
      for (int dy = 0; dy < 3; dy++)
        for (int dx = 0; dx < 3; dx++) begin
          int y = oy + dy - 1, x = ox + dx - 1;
          act[c*9 + dy*3 + dx] = (y < 0 || y >= H || x < 0 || x >= W) ? 0 : fmap[c][y][x];
        end
    for (int j = 0; j < M; j++) begin
      @(negedge clk);
      a_wr_en = 1; a_wr_addr = AW'(j); a_wr_data = 8'(act[j]);
    end
    @(negedge clk) a_wr_en = 0;
  endtask

  task automatic run();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!adc_valid) @(negedge clk);
  endtask

  initial begin
    real mu0, mu1, s0, s1, g, o, err_raw, err_ft;
    int e, ef;
    // data: each channel's taps share a sign; channels of positive sign
    // are bright on the right of the map, negative ones on the left
    for (int c = 0; c < C; c++) begin
      automatic int sg = (c % 2 == 0) ? 1 : -1;
      for (int k = 0; k < 9; k++) begin
        automatic int mag = int'($urandom_range(0, 127));
        filt[c*9 + k] = ($urandom_range(0, 7) == 0) ? -sg * mag : sg * mag;
      end
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          automatic int ramp = (sg > 0) ? x : (W - 1 - x);
          automatic int v = ramp * 22 + int'($urandom_range(0, 15));
          fmap[c][y][x] = (v > 127) ? 127 : v;
        end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < M; j++) begin
      @(negedge clk);
      w_wr_en = 1; w_wr_addr = AW'(j); w_wr_data = 8'(filt[j]);
    end
    @(negedge clk) w_wr_en = 0;

    // pass 1: ReLU off, calibration data
    relu_en = 0;
    for (int p = 0; p < H*W; p++) begin
      longint mac;
      gather(p / W, p % W);
      run();
      mac = dot();
      e = floor_div(mac, 128 * M);
      e = (e > 127) ? 127 : (e < -128) ? -128 : e;
      expect_eq("conv ADC output", int'(adc_out), e);
      adc1[p] = int'(adc_out);
      ideal[p] = real'(mac) / real'(128 * M);
    end
    mu0 = 0; mu1 = 0;
    for (int p = 0; p < H*W; p++) begin mu0 += ideal[p]; mu1 += real'(adc1[p]); end
    mu0 /= H*W; mu1 /= H*W;
    s0 = 0; s1 = 0;
    for (int p = 0; p < H*W; p++) begin
      s0 += (ideal[p] - mu0) ** 2;
      s1 += (real'(adc1[p]) - mu1) ** 2;
    end
    s0 = $sqrt(s0 / (H*W)); s1 = $sqrt(s1 / (H*W));
    g = (s1 > 0) ? s0 / s1 : 1.0;
    o = mu0 - g * mu1;
    ft_gain = 16'($rtoi(g * 256.0 + 0.5));
    ft_offset = 16'(int'($floor(o * 256.0 + 0.5)));
    $display("calibration: mu0=%f sigma0=%f mu1=%f sigma1=%f gain=%0d/256 offset=%0d/256",
             mu0, s0, mu1, s1, ft_gain, ft_offset);

    // pass 2: ReLU on, fine-tune applied
    relu_en = 1;
    err_raw = 0; err_ft = 0;
    for (int p = 0; p < H*W; p++) begin
      gather(p / W, p % W);
      run();
      e = (adc1[p] < 0) ? 0 : adc1[p];
      expect_eq("conv ReLU output", int'(adc_out), e);
      expect_eq("conv early stop", int'(early_stop), int'(adc1[p] < 0));
      if (early_stop) n_early++; else n_pos++;
      @(negedge clk);
      ef = int'($floor((real'(ft_gain) * real'(e) + real'(ft_offset)) / 256.0 + 0.5));
      ef = (ef > 127) ? 127 : (ef < -128) ? -128 : ef;
      expect_eq("conv fine-tuned output", int'(mac_out), ef);
      if (ideal[p] > 0) begin
        err_raw += real'(e) - ideal[p];
        err_ft  += real'(ef) - ideal[p];
      end
    end
    checks++;
    if (n_early == 0 || n_pos == 0) begin
      failures++;
      $display("FAIL conv pixels did not cover both signs");
    end
    $display("pixels: %0d early stops, %0d positive; mean error on positive pixels: raw %f, fine-tuned %f",
             n_early, n_pos, err_raw / (n_pos > 0 ? n_pos : 1), err_ft / (n_pos > 0 ? n_pos : 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
