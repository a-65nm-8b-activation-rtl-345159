// Behavioural model of one M x 9 bank of 10T1C SRAM CiM cells (analog part).
//
// Each row j stores the 9-digit code of weight W_j.  Every cell multiplies
// its stored digit by the activation digit on its row's IA/IAB pair (a +/-1
// product, XNOR on 0/1 bits) and couples the result through its capacitor
// onto the source line ScL of its column.  All M cells of a column share an
// equal load, so the ScL settles at the average of the M products.  The
// model represents that voltage exactly as an integer: scl[i] is the number
// of rows whose product is +1, and the ScL voltage is scl[i]/M of VDD.
// Mismatch and parasitics are not modelled.
//
// Timing: a write (wr_en) stores one row at the clock edge.  While rst_scl
// is high the source lines are cleared; while s1 (switch S1) is high they
// take the coupled value at each edge; otherwise they hold.  The storage
// itself has no reset.
module cim_bank #(
  parameter  int unsigned M  = 1152,
  localparam int unsigned AW = $clog2(M),
  localparam int unsigned CW = $clog2(M + 1)
) (
  input  logic                             clk,
  input  logic                             wr_en,
  input  logic [AW-1:0]                    wr_addr,
  input  logic [cim_pkg::NCOL-1:0]         wr_data,
  input  logic [M-1:0]                     ia,
  input  logic                             rst_scl,
  input  logic                             s1,
  output logic [cim_pkg::NCOL-1:0][CW-1:0] scl
);
  import cim_pkg::*;

  logic [NCOL-1:0]         wcell [M];
  logic [NCOL-1:0][CW-1:0] coupled;

  always_ff @(posedge clk) begin
    if (wr_en && (int'(wr_addr) < M)) wcell[wr_addr] <= wr_data;
  end

  // Charge coupled onto each source line: count of +1 products.
  for (genvar i = 0; i < NCOL; i++) begin : g_col
    always_comb begin
      coupled[i] = '0;
      for (int j = 0; j < M; j++)
        coupled[i] = coupled[i] + {{(CW-1){1'b0}}, (ia[j] ~^ wcell[j][i])};
    end
  end

  always_ff @(posedge clk) begin
    if (rst_scl)  scl <= '0;
    else if (s1)  scl <= coupled;
  end

endmodule
