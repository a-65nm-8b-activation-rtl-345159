// Behavioural model of a CAAT leaf, the in-bank capacitor network (analog).
//
// The leaf joins the nine source lines of one bank when switch S2 closes.
// The five low-weight columns (digits n0-, n0+, n1, n2, n3) feed a C-2C
// ladder (linear cap sub-array) that halves their weight per stage.  The four
// high-weight columns (n4..n7) load binary capacitors 2C, 4C, 8C and 8C+8C
// (exp. cap sub-array).  With ideal charge sharing, the merged node is the
// weighted average of the column voltages, with weights 1,1,2,4,...,128.
// The model keeps it as an exact integer:
//   leaf = sum_i w_i * scl[i],   leaf voltage = leaf / (256*M) of VDD.
// The network's nonlinearity from parasitics is not modelled.
//
// Timing: cleared while rst_node is high, follows its inputs at each edge
// while s2 is high, holds otherwise.
module caat_leaf #(
  parameter  int unsigned M  = 1152,
  localparam int unsigned CW = $clog2(M + 1),
  localparam int unsigned LW = $clog2(cim_pkg::WSUM * M + 1)
) (
  input  logic                             clk,
  input  logic                             rst_node,
  input  logic                             s2,
  input  logic [cim_pkg::NCOL-1:0][CW-1:0] scl,
  output logic [LW-1:0]                    leaf
);
  import cim_pkg::*;

  logic [LW-1:0] merged;

  always_comb begin
    merged = '0;
    for (int i = 0; i < NCOL; i++)
      merged = merged + LW'(digit_weight(i)) * LW'(scl[i]);
  end

  always_ff @(posedge clk) begin
    if (rst_node) leaf <= '0;
    else if (s2)  leaf <= merged;
  end

endmodule
