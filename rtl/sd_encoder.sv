// Signed-digit encoder: 8b two's complement -> 9 digits of value +/-1.
//
// Produces the representation x = sum_{i=1..7} n_i*2^(i-1) + (n0+ + n0-)/2
// with every n in {-1,+1} (bit 1 = +1, bit 0 = -1), the format the charge
// domain array computes with (a 1b product of two digits is then XNOR).
// The representation of a value is not unique; this encoder uses the
// canonical choice
//   code[8:2] = (x + 128) >> 1      digits n7..n1 in offset binary
//   code[1]   = x[0]                n0+
//   code[0]   = 0                   n0- (always -1)
// which covers every x in [-128, 127].  Purely combinational.
module sd_encoder (
  input  logic signed [7:0] x,
  output logic        [8:0] code   // {n7..n1, n0+, n0-}
);

  always_comb begin
    code[8]   = ~x[7];
    code[7:2] = x[6:1];
    code[1]   = x[0];
    code[0]   = 1'b0;
  end

endmodule
