// Self-checking testbench of phase_ctrl at its default lengths.
// Logs the phase of every cycle after a start and checks the run lengths
// 3/3/10/2/24/3 (45 cycles in all), that each switch is on exactly in its
// phase, 12 ADC ticks and one adc_start per CiM cycle, and, with start held,
// that the next CiM cycle follows at once (one cycle_done every 45 clocks).
module phase_ctrl_tb;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  phase_t phase;
  logic rst_sw, s1, s2, s3, adc_start, adc_tick, busy, cycle_done;
  int checks = 0, failures = 0;
  int cnt [7];
  int ticks, starts, cyc, last_done, n_done;

  phase_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(string tag, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", tag, got, exp_v);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq("standby busy", int'(busy), 0);
    start = 1;
    @(negedge clk) start = 0;
    for (int p = 0; p < 7; p++) cnt[p] = 0;
    ticks = 0; starts = 0;
    for (int c = 0; c < 45; c++) begin
      cnt[int'(phase)]++;
      expect_eq("rst_sw", int'(rst_sw), int'(phase == PH_RESET));
      expect_eq("s1", int'(s1), int'(phase == PH_COUPLE));
      expect_eq("s2", int'(s2), int'(phase == PH_LEAF));
      expect_eq("s3", int'(s3), int'(phase == PH_ROOT));
      if (adc_tick) ticks++;
      if (adc_start) starts++;
      expect_eq("cycle_done", int'(cycle_done), int'(c == 44));
      @(negedge clk);
    end
    expect_eq("reset cycles", cnt[PH_RESET], 3);
    expect_eq("coupling cycles", cnt[PH_COUPLE], 3);
    expect_eq("CAAT-L cycles", cnt[PH_LEAF], 10);
    expect_eq("CAAT-R cycles", cnt[PH_ROOT], 2);
    expect_eq("ADC cycles", cnt[PH_ADC], 24);
    expect_eq("idle cycles", cnt[PH_IDLE], 3);
    expect_eq("ADC ticks", ticks, 12);
    expect_eq("ADC starts", starts, 1);
    expect_eq("back in standby", int'(phase == PH_STANDBY), 1);
    // held start: back-to-back cycles
    start = 1;
    cyc = 0; last_done = -1; n_done = 0;
    while (n_done < 3) begin
      @(negedge clk);
      cyc++;
      if (cycle_done) begin
        if (last_done >= 0) expect_eq("cycle period", cyc - last_done, 45);
        last_done = cyc;
        n_done++;
      end
      checks++;
      if (cyc > 10 && !busy) begin
        failures++;
        $display("FAIL gap between back-to-back cycles");
      end
    end
    start = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
