// Activation buffer with bit-plane outputs.
//
// Stores the M activations of the input vector, each as its 9-digit code
// (see sd_encoder), and drives the IA lines of the nine CiM banks: bank k
// receives digit k of every activation, so all activation digits are applied
// in parallel in one CiM cycle.  One activation is written per clock through
// wr_en/wr_addr/wr_data; the new code is on the outputs the cycle after the
// write.  Reset clears every entry to the code of activation 0.  The write
// port and reset value are this design's choice; the bit-split to the banks
// follows the paper.
module act_buffer #(
  parameter  int unsigned M  = 1152,
  localparam int unsigned AW = $clog2(M)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             wr_en,
  input  logic [AW-1:0]                    wr_addr,
  input  logic signed [7:0]                wr_data,
  output logic [cim_pkg::NDIG-1:0][M-1:0]  ia      // ia[k][j]: digit k of A_j
);
  import cim_pkg::*;

  localparam logic [NDIG-1:0] CODE_ZERO = 9'b1_0000_0000;

  logic [NDIG-1:0] code_in;
  logic [NDIG-1:0] mem [M];

  sd_encoder u_enc (.x(wr_data), .code(code_in));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M; j++) mem[j] <= CODE_ZERO;
    end else if (wr_en && (int'(wr_addr) < M)) begin
      mem[wr_addr] <= code_in;
    end
  end

  for (genvar k = 0; k < NDIG; k++) begin : g_plane
    for (genvar j = 0; j < M; j++) begin : g_row
      assign ia[k][j] = mem[j][k];
    end
  end

endmodule
