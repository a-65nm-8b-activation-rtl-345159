// Self-checking testbench of act_buffer (M = 40).
// Checks the reset contents (every row decodes to 0), then writes random
// activations and checks that the bit planes ia[k][j] decode back to the
// written values with the +/-1 digit formula, including a rewrite of one row.
module act_buffer_tb;
  localparam int M = 40;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [$clog2(M)-1:0] wr_addr = '0;
  logic signed [7:0] wr_data = '0;
  logic [8:0][M-1:0] ia;
  int checks = 0, failures = 0;
  int ref_a [M];

  act_buffer #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  function automatic int decode_row(int j);   // returns 2*A_j
    int v = 0;
    for (int d = 0; d < 9; d++) begin
      int w = (d == 0) ? 1 : (1 << (d - 1));
      v += ia[d][j] ? w : -w;
    end
    return v;
  endfunction

  task automatic check_all(string tag);
    for (int j = 0; j < M; j++) begin
      checks++;
      if (decode_row(j) != 2 * ref_a[j]) begin
        failures++;
        $display("FAIL %s row %0d: got %0d/2 expected %0d", tag, j, decode_row(j), ref_a[j]);
      end
    end
  endtask

  initial begin
    for (int j = 0; j < M; j++) ref_a[j] = 0;
    repeat (2) @(posedge clk);
    #1 check_all("reset");
    rst_n = 1;
    for (int j = 0; j < M; j++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = j[$clog2(M)-1:0];
      ref_a[j] = (j == 0) ? -128 : (j == 1) ? 127 : int'($urandom_range(0, 255)) - 128;
      wr_data = 8'(ref_a[j]);
    end
    @(negedge clk) wr_en = 0;
    check_all("write");
    @(negedge clk);
    wr_en = 1; wr_addr = 5; wr_data = -8'sd77; ref_a[5] = -77;
    @(negedge clk) wr_en = 0;
    check_all("rewrite");
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
