// Self-checking testbench of sar_relu_ctrl.
// A testbench comparator holds an input level vq in 1/1024 of full scale
// and answers cmp_out = (vq >= 4*dac_code).  The expected code is
// u = min(255, vq/4).  With ReLU the result must be u-128 for u >= 128, and
// otherwise 0 after exactly one comparison (early stop).  Without ReLU it
// must be u-128.  Ticks come every second cycle as in the macro; the number
// of ticks from start to done (2 for an early stop, 9 otherwise) and the
// number of comparator firings are checked too.
module sar_relu_ctrl_tb;
  logic clk = 0, rst_n = 0, adc_tick = 0, start = 0, relu_en = 0;
  logic sample, cmp_en, cmp_out, done, early_stop;
  logic [7:0] dac_code;
  logic signed [7:0] result;
  logic [3:0] n_cmp;
  int vq, vq_held;
  int checks = 0, failures = 0, n_early = 0, n_full = 0;
  int fired, ticks;

  sar_relu_ctrl dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (sample) vq_held <= vq;
  assign cmp_out = cmp_en && (vq_held >= 4 * int'(dac_code));

  task automatic expect_eq(string tag, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (vq=%0d relu=%0b)", tag, got, exp_v, vq, relu_en);
    end
  endtask

  task automatic convert(int level, logic relu);
    int u, exp_res;
    logic exp_early;
    vq = level; relu_en = relu;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    fired = 0; ticks = 0;
    while (!done) begin
      adc_tick = ~adc_tick;
      if (adc_tick) ticks++;
      @(posedge clk);
      if (cmp_en) fired++;
      @(negedge clk);
    end
    adc_tick = 0;
    u = (level / 4 > 255) ? 255 : level / 4;
    exp_early = relu && (u < 128);
    exp_res = (relu && u < 128) ? 0 : u - 128;
    expect_eq("result", int'(result), exp_res);
    expect_eq("early_stop", int'(early_stop), int'(exp_early));
    expect_eq("n_cmp", int'(n_cmp), exp_early ? 1 : 8);
    expect_eq("comparisons fired", fired, exp_early ? 1 : 8);
    expect_eq("ticks", ticks, exp_early ? 2 : 9);
    if (exp_early) n_early++; else n_full++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    convert(0, 1'b1);
    convert(1023, 1'b1);
    convert(512, 1'b1);
    convert(511, 1'b1);
    convert(0, 1'b0);
    convert(511, 1'b0);
    for (int t = 0; t < 200; t++) convert(int'($urandom_range(0, 1024)), 1'($urandom));
    checks++;
    if (n_early == 0 || n_full == 0) begin
      failures++;
      $display("FAIL early stop or full conversion never exercised");
    end
    $display("early stops %0d, full conversions %0d", n_early, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
