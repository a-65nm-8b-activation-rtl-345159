// Output-based fine-tune of the ADC result.
//
// Applies y = g*x + b with g = sigma0/sigma1 and b = mu0 - g*mu1, which
// gives the measured output distribution the mean and spread of the ideal
// one (sigma/mu of the ideal output: index 0; of the measured output:
// index 1).  The two parameters come from a one-time calibration run on a
// host and are inputs here.  The formula follows the paper.  The number
// format is this design's choice: g and b are signed Q8.8 (FRAC = 8
// fraction bits), the result is rounded half up and saturated to 8b signed.
// One register stage: y and out_valid follow x and in_valid by one cycle.
module finetune #(
  parameter int unsigned FRAC = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [7:0]  x,
  input  logic signed [15:0] gain,
  input  logic signed [15:0] offset,
  output logic               out_valid,
  output logic signed [7:0]  y
);

  logic signed [24:0] prod;
  logic signed [25:0] acc;
  logic signed [25:0] rounded;
  logic signed [7:0]  sat;

  always_comb begin
    prod    = 25'(gain) * 25'(x);
    acc     = 26'(prod) + 26'(offset);
    rounded = (acc + 26'(1 << (FRAC - 1))) >>> FRAC;
    if (rounded > 26'sd127)       sat = 8'sd127;
    else if (rounded < -26'sd128) sat = -8'sd128;
    else                          sat = rounded[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= sat;
    end
  end

endmodule
