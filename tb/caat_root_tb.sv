// Self-checking testbench of caat_root (M = 1152).
// Drives random leaf node values and checks the merged node against the
// weighted sum with leaf weights 1,1,2,4,8,16,32,64,128; checks hold
// with S3 open and clearing in the reset phase.
module caat_root_tb;
  localparam int M = 1152;
  localparam int CW = $clog2(256 * M + 1);
  localparam int LW = $clog2(65536 * M + 1);
  localparam int WT [9] = '{1, 1, 2, 4, 8, 16, 32, 64, 128};
  logic clk = 0, rst_node = 0, s3 = 0;
  logic [8:0][CW-1:0] leaf = '0;
  logic [LW-1:0] root;
  longint expect_root;
  int checks = 0, failures = 0;

  caat_root #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string tag);
    checks++;
    if (longint'(root) != expect_root) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", tag, root, expect_root);
    end
  endtask

  initial begin
    for (int t = 0; t < 50; t++) begin
      @(negedge clk) rst_node = 1;
      @(negedge clk) rst_node = 0;
      expect_root = 0;
      check("reset");
      expect_root = 0;
      for (int i = 0; i < 9; i++) begin
        automatic int v = (t == 0) ? 256 * M : (t == 1) ? 0 : int'($urandom_range(0, 256 * M));
        leaf[i] = CW'(v);
        expect_root += longint'(WT[i]) * v;
      end
      @(negedge clk) s3 = 1;
      @(negedge clk) s3 = 0;
      check("merge");
      leaf = '0;
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
