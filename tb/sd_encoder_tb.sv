// Self-checking testbench of sd_encoder.
// Runs all 256 inputs and decodes each code with the +/-1 digit formula
// x = sum_{i=1..7} n_i*2^(i-1) + (n0+ + n0-)/2, evaluated in half-LSB
// units, then compares the result with the input.
module sd_encoder_tb;
  logic signed [7:0] x;
  logic        [8:0] code;
  int checks = 0, failures = 0;

  sd_encoder dut (.x(x), .code(code));

  function automatic int decode2(logic [8:0] c);   // returns 2*x
    int v = 0;
    for (int d = 0; d < 9; d++) begin
      int w = (d == 0) ? 1 : (1 << (d - 1));
      v += c[d] ? w : -w;
    end
    return v;
  endfunction

  initial begin
    for (int v = -128; v <= 127; v++) begin
      x = 8'(v);
      #1;
      checks++;
      if (decode2(code) != 2 * v) begin
        failures++;
        $display("FAIL x=%0d code=%b decodes to %0d/2", v, code, decode2(code));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
