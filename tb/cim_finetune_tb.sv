// Fine-tune workload testbench: the 3x3 x 128-channel convolution of
// cim_conv_tb at M = 1152, on a macro whose analog path has a linear error
// (slope -15%, offset -2.5 LSB, set through ADC_GAIN_PPM and ADC_OFFSET_Q).
//
// Pass 1 (ReLU off) checks each ADC result against the distorted transfer
// computed here in floating point (within 1 LSB for rounding at code
// edges).  It collects mu1/sigma1 of the ADC outputs and mu0/sigma0 of the
// ideal outputs MAC/(128*M), then programs gain = sigma0/sigma1 and
// offset = mu0 - gain*mu1.  Pass 2 (ReLU off) checks every fine-tuned
// output against round(gain*x + offset).  It also checks that fine-tune
// moves the output mean and spread closer to the ideal ones than the raw
// ADC output.
module cim_finetune_tb;
  import cim_pkg::*;
  localparam int M = 1152;
  localparam int C = 128, H = 6, W = 6;
  localparam int AW = $clog2(M);
  localparam int GAIN_PPM = -150000, OFFSET_Q = -40;

  logic clk = 0, rst_n = 0;
  logic w_wr_en = 0, a_wr_en = 0, relu_en = 0, start = 0;
  logic [AW-1:0] w_wr_addr = '0, a_wr_addr = '0;
  logic signed [7:0] w_wr_data = '0, a_wr_data = '0;
  logic signed [15:0] ft_gain = 16'sd256, ft_offset = '0;
  logic busy, adc_valid, early_stop, out_valid;
  logic signed [7:0] adc_out, mac_out;
  logic [3:0] n_cmp;
  phase_t phase;

  int checks = 0, failures = 0;
  int filt [M];
  int fmap [C][H][W];
  int act [M];
  int adc1 [H*W];
  real ideal [H*W];

  cim_macro #(.M(M), .ADC_GAIN_PPM(GAIN_PPM), .ADC_OFFSET_Q(OFFSET_Q)) dut (.*);

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
    real mu0, mu1, s0, s1, g, o;
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
      begin
        automatic real v = 0.5 + (real'(2 * mac) / real'(65536 * M)) * (1.0 + real'(GAIN_PPM) / 1.0e6)
                 + real'(OFFSET_Q) / 4096.0;
        e = int'($floor(v * 256.0));
        e = ((e > 255) ? 255 : (e < 0) ? 0 : e) - 128;
        checks++;
        if (int'(adc_out) - e > 1 || e - int'(adc_out) > 1) begin
          failures++;
          $display("FAIL distorted ADC output %0d, expected %0d", adc_out, e);
        end
      end
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

    // pass 2: ReLU off, fine-tune applied
    relu_en = 0;
    begin
      real mf = 0, sf = 0;
      real yft [H*W];
      for (int p = 0; p < H*W; p++) begin
        gather(p / W, p % W);
        run();
        expect_eq("repeatable ADC output", int'(adc_out), adc1[p]);
        @(negedge clk);
        ef = int'($floor((real'(ft_gain) * real'(adc1[p]) + real'(ft_offset)) / 256.0 + 0.5));
        ef = (ef > 127) ? 127 : (ef < -128) ? -128 : ef;
        expect_eq("fine-tuned output", int'(mac_out), ef);
        yft[p] = real'(mac_out);
        mf += yft[p];
      end
      mf /= H*W;
      for (int p = 0; p < H*W; p++) sf += (yft[p] - mf) ** 2;
      sf = $sqrt(sf / (H*W));
      $display("ideal mean %f sd %f | raw mean %f sd %f | fine-tuned mean %f sd %f",
               mu0, s0, mu1, s1, mf, sf);
      checks++;
      if (!((mf - mu0) ** 2 < (mu1 - mu0) ** 2)) begin
        failures++;
        $display("FAIL fine-tune did not move the mean towards the ideal");
      end
      checks++;
      if (!((sf - s0) ** 2 < (s1 - s0) ** 2)) begin
        failures++;
        $display("FAIL fine-tune did not move the spread towards the ideal");
      end
    end
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
