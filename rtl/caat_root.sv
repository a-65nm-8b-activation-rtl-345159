// Behavioural model of the CAAT root, the in-array capacitor network (analog).
//
// When switch S3 closes, the root joins the nine leaf nodes CAAT-L[0..8],
// one per activation digit, through the same hybrid network as a leaf:
// C-2C ladder for leaves 0..4, binary 2C/4C/8C/8C+8C for leaves 5..8.
// Its node then holds the full MAC result in analog form.  Exact integer:
//   root = sum_k w_k * leaf[k],  root voltage = root / (65536*M) of VDD,
// and the signed dot product of the 8b vectors is root/2 - 16384*M.
//
// Timing: cleared while rst_node is high, follows its inputs at each edge
// while s3 is high, holds otherwise (the ADC samples the held value).
module caat_root #(
  parameter  int unsigned M  = 1152,
  localparam int unsigned LW = $clog2(cim_pkg::WSUM * M + 1),
  localparam int unsigned RW = $clog2(cim_pkg::WSUM * cim_pkg::WSUM * M + 1)
) (
  input  logic                              clk,
  input  logic                              rst_node,
  input  logic                              s3,
  input  logic [cim_pkg::NBANK-1:0][LW-1:0] leaf,
  output logic [RW-1:0]                     root
);
  import cim_pkg::*;

  logic [RW-1:0] merged;

  always_comb begin
    merged = '0;
    for (int k = 0; k < NBANK; k++)
      merged = merged + RW'(digit_weight(k)) * RW'(leaf[k]);
  end

  always_ff @(posedge clk) begin
    if (rst_node) root <= '0;
    else if (s3)  root <= merged;
  end

endmodule
