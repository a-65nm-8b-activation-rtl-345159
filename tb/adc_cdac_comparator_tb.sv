// Self-checking testbench of adc_cdac_comparator (M = 1152).
// For random held inputs and DAC codes, and for inputs exactly at and one
// unit below a DAC level, cmp_out must be 1 iff vin/FS >= code/256.  Also
// checks that cmp_out is 0 with cmp_en low and that the held sample does
// not follow vin while sample is low.
module adc_cdac_comparator_tb;
  localparam int M = 1152;
  localparam int RW = $clog2(65536 * M + 1);
  localparam longint FS = 65536 * longint'(M);
  logic clk = 0, sample = 0, cmp_en = 0;
  logic [RW-1:0] vin = '0;
  logic [7:0] dac_code = '0;
  logic cmp_out;
  longint held;
  int checks = 0, failures = 0;

  adc_cdac_comparator #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  task automatic check_code(logic [7:0] c);
    logic expect_cmp;
    dac_code = c; cmp_en = 1;
    #1;
    expect_cmp = (real'(held) / real'(FS)) >= (real'(c) / 256.0);
    checks++;
    if (cmp_out !== expect_cmp) begin
      failures++;
      $display("FAIL held=%0d code=%0d cmp=%b expected %b", held, c, cmp_out, expect_cmp);
    end
    cmp_en = 0;
    #1;
    checks++;
    if (cmp_out !== 1'b0) begin
      failures++;
      $display("FAIL cmp_out high with cmp_en low");
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      longint v;
      logic [7:0] c;
      c = 8'($urandom);
      case (t % 4)
        0: v = longint'($urandom_range(0, 65536 * M));
        1: v = longint'(c) * 256 * M;          // exactly on the DAC level
        2: v = longint'(c) * 256 * M - 1;      // just below it
        default: v = (t % 8 == 3) ? FS : 0;
      endcase
      if (v < 0) v = 0;
      @(negedge clk) begin vin = RW'(v); sample = 1; end
      @(negedge clk) sample = 0;
      held = v;
      vin = '0;                                  // must not disturb the hold
      check_code(c);
      check_code(8'($urandom));
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
