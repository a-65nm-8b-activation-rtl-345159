// Self-checking testbench of cim_bank (M = 64).
// Writes random 9-digit rows, applies random activation digits and pulses
// S1; each source line must then equal the number of rows whose stored
// digit equals the activation digit (a +1 product).  Also checks that the
// lines hold with S1 open and clear in the reset phase.
module cim_bank_tb;
  localparam int M = 64;
  logic clk = 0, wr_en = 0, rst_scl = 0, s1 = 0;
  logic [$clog2(M)-1:0] wr_addr = '0;
  logic [8:0] wr_data = '0;
  logic [M-1:0] ia = '0;
  logic [8:0][$clog2(M+1)-1:0] scl;
  logic [8:0] ref_w [M];
  int expect_scl [9];
  int checks = 0, failures = 0;

  cim_bank #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  task automatic compute_ref();
    for (int i = 0; i < 9; i++) begin
      expect_scl[i] = 0;
      for (int j = 0; j < M; j++)
        if (ia[j] == ref_w[j][i]) expect_scl[i]++;
    end
  endtask

  task automatic check(string tag);
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (int'(scl[i]) != expect_scl[i]) begin
        failures++;
        $display("FAIL %s col %0d: got %0d expected %0d", tag, i, scl[i], expect_scl[i]);
      end
    end
  endtask

  initial begin
    for (int j = 0; j < M; j++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = j[$clog2(M)-1:0];
      ref_w[j] = 9'($urandom);
      wr_data = ref_w[j];
    end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk) rst_scl = 1;
      @(negedge clk) rst_scl = 0;
      for (int i = 0; i < 9; i++) expect_scl[i] = 0;
      check("reset");
      ia = t == 0 ? '0 : t == 1 ? '1 : {$urandom, $urandom};
      compute_ref();
      @(negedge clk) s1 = 1;
      @(negedge clk) s1 = 0;
      check("couple");
      ia = ~ia;               // activations change with S1 open: must hold
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
