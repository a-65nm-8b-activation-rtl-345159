// Self-checking testbench of finetune.
// For random and edge-case gain/offset (Q8.8) and inputs, the output must
// be round-half-up(gain/256*x + offset/256) saturated to [-128,127],
// computed here in floating point, one cycle after in_valid.  Saturation at
// both ends must be hit.
module finetune_tb;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [7:0] x = '0;
  logic signed [15:0] gain = '0, offset = '0;
  logic out_valid;
  logic signed [7:0] y;
  int checks = 0, failures = 0, n_sat_hi = 0, n_sat_lo = 0;

  finetune dut (.*);

  always #5 clk = ~clk;

  task automatic apply(int g, int o, int xv);
    real v;
    int e;
    @(negedge clk);
    gain = 16'(g); offset = 16'(o); x = 8'(xv); in_valid = 1;
    @(negedge clk) in_valid = 0;
    v = (real'(g) * real'(xv) + real'(o)) / 256.0;
    e = int'($floor(v + 0.5));
    if (e > 127) begin e = 127; n_sat_hi++; end
    if (e < -128) begin e = -128; n_sat_lo++; end
    checks++;
    if (!out_valid || int'(y) != e) begin
      failures++;
      $display("FAIL g=%0d o=%0d x=%0d: y=%0d valid=%b expected %0d", g, o, xv, y, out_valid, e);
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin
      failures++;
      $display("FAIL out_valid not a single pulse");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    apply(256, 0, 5);           // identity
    apply(256, 128, 0);         // +0.5 rounds up
    apply(256, -128, 0);        // -0.5 rounds up to 0
    apply(32767, 0, 127);       // saturate high
    apply(32767, 0, -128);      // saturate low
    apply(-32768, -32768, -128);
    for (int t = 0; t < 400; t++) begin
      automatic int g = (t % 2) ? int'($urandom_range(0, 1024)) : int'($urandom_range(0, 65535)) - 32768;
      automatic int o = int'($urandom_range(0, 65535)) - 32768;
      if (t % 3 == 0) o = o / 64;
      apply(g, o, int'($urandom_range(0, 255)) - 128);
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0) begin
      failures++;
      $display("FAIL saturation not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
