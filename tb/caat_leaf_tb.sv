// Self-checking testbench of caat_leaf (M = 1152).
// Drives random source-line counts and checks the merged node against the
// weighted sum with column weights 1,1,2,4,8,16,32,64,128; checks hold
// with S2 open and clearing in the reset phase.
module caat_leaf_tb;
  localparam int M = 1152;
  localparam int CW = $clog2(M + 1);
  localparam int LW = $clog2(256 * M + 1);
  localparam int WT [9] = '{1, 1, 2, 4, 8, 16, 32, 64, 128};
  logic clk = 0, rst_node = 0, s2 = 0;
  logic [8:0][CW-1:0] scl = '0;
  logic [LW-1:0] leaf;
  longint expect_leaf;
  int checks = 0, failures = 0;

  caat_leaf #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string tag);
    checks++;
    if (longint'(leaf) != expect_leaf) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", tag, leaf, expect_leaf);
    end
  endtask

  initial begin
    for (int t = 0; t < 50; t++) begin
      @(negedge clk) rst_node = 1;
      @(negedge clk) rst_node = 0;
      expect_leaf = 0;
      check("reset");
      expect_leaf = 0;
      for (int i = 0; i < 9; i++) begin
        automatic int v = (t == 0) ? M : (t == 1) ? 0 : int'($urandom_range(0, M));
        scl[i] = CW'(v);
        expect_leaf += longint'(WT[i]) * v;
      end
      @(negedge clk) s2 = 1;
      @(negedge clk) s2 = 0;
      check("merge");
      scl = '0;
      @(negedge clk);
      check("hold");
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
