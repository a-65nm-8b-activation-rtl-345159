// Single-ADC charge-domain computing-in-memory macro (top level).
//
// Computes one signed 8b x 8b dot product of length M, followed by ReLU,
// per CiM cycle with a single A/D conversion.  The weight vector is stored
// nine times, once per bank; bank k is driven by digit k of all
// activations, so the nine banks together see every (activation digit,
// weight digit) pair at once.  Per bank, the 9 column averages are merged by
// a CAAT leaf.  The 9 leaves are merged by the CAAT root, whose voltage is
// the normalised MAC result; one 8b ReLU-optimized SAR ADC converts it.
// The fine-tune stage then corrects mean and spread.
//
// Result scaling: with MAC = sum_j A_j*W_j, the ADC result is
//   clamp(floor(MAC / (128*M)), -128, 127), or 0 when relu_en and MAC < 0.
//
// Interface: w_wr_* writes a signed weight into row j of all nine banks;
// a_wr_* writes a signed activation; both take one row per cycle and are
// meant for standby (writes during a CiM cycle only matter before its
// coupling phase).  start begins a CiM cycle.  A held start runs one cycle
// every 45 clocks.  Counted from the clock edge that samples start,
// adc_valid rises at edge 36 with the raw 8-bit digital sum on adc_out
// (edge 22 after an early stop).
// out_valid/mac_out follow one clock later through the fine-tune stage.
// The analog parts (banks, CAAT, ADC front end) are behavioural models
// with ideal, exact arithmetic by default; ADC_GAIN_PPM and ADC_OFFSET_Q
// add a linear error to the analog result.  The architecture (replicated banks, two-
// level CAAT, single ReLU ADC, fine-tune) follows the paper; the write
// ports, relu_en and the status outputs are this design's choices.
module cim_macro #(
  parameter  int unsigned M            = 1152,
  parameter  int          ADC_GAIN_PPM = 0,     // analog error model, 0 = ideal
  parameter  int          ADC_OFFSET_Q = 0,     // (see adc_cdac_comparator)
  localparam int unsigned AW = $clog2(M)
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight write, replicated into all banks
  input  logic               w_wr_en,
  input  logic [AW-1:0]      w_wr_addr,
  input  logic signed [7:0]  w_wr_data,
  // activation write
  input  logic               a_wr_en,
  input  logic [AW-1:0]      a_wr_addr,
  input  logic signed [7:0]  a_wr_data,
  // configuration
  input  logic               relu_en,
  input  logic signed [15:0] ft_gain,
  input  logic signed [15:0] ft_offset,
  // operation
  input  logic               start,
  output logic               busy,
  output logic               adc_valid,
  output logic signed [7:0]  adc_out,
  output logic               early_stop,
  output logic [3:0]         n_cmp,       // comparisons in the last conversion
  output cim_pkg::phase_t    phase,
  output logic               out_valid,
  output logic signed [7:0]  mac_out
);
  import cim_pkg::*;

  localparam int unsigned CW = $clog2(M + 1);
  localparam int unsigned LW = $clog2(WSUM * M + 1);
  localparam int unsigned RW = $clog2(WSUM * WSUM * M + 1);

  // control
  logic       rst_sw, s1, s2, s3, adc_start, adc_tick, cycle_done;

  // datapath
  logic [NDIG-1:0]                   w_code;
  logic [NDIG-1:0][M-1:0]            ia;
  logic [NBANK-1:0][NCOL-1:0][CW-1:0] scl;
  logic [NBANK-1:0][LW-1:0]          leaf;
  logic [RW-1:0]                     root;
  logic                              sample, cmp_en, cmp_out;
  logic [7:0]                        dac_code;

  phase_ctrl u_ctrl (
    .clk, .rst_n, .start, .phase, .rst_sw, .s1, .s2, .s3,
    .adc_start, .adc_tick, .busy, .cycle_done
  );

  act_buffer #(.M(M)) u_abuf (
    .clk, .rst_n, .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data), .ia
  );

  sd_encoder u_wenc (.x(w_wr_data), .code(w_code));

  for (genvar k = 0; k < NBANK; k++) begin : g_bank
    cim_bank #(.M(M)) u_bank (
      .clk, .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_code),
      .ia(ia[k]), .rst_scl(rst_sw), .s1, .scl(scl[k])
    );
    caat_leaf #(.M(M)) u_leaf (
      .clk, .rst_node(rst_sw), .s2, .scl(scl[k]), .leaf(leaf[k])
    );
  end

  caat_root #(.M(M)) u_root (
    .clk, .rst_node(rst_sw), .s3, .leaf, .root
  );

  adc_cdac_comparator #(.M(M), .GAIN_PPM(ADC_GAIN_PPM), .OFFSET_Q(ADC_OFFSET_Q)) u_afe (
    .clk, .sample, .vin(root), .dac_code, .cmp_en, .cmp_out
  );

  sar_relu_ctrl u_sar (
    .clk, .rst_n, .adc_tick, .start(adc_start), .relu_en, .sample, .dac_code,
    .cmp_en, .cmp_out, .done(adc_valid), .result(adc_out), .early_stop, .n_cmp
  );

  finetune u_ft (
    .clk, .rst_n, .in_valid(adc_valid), .x(adc_out), .gain(ft_gain),
    .offset(ft_offset), .out_valid, .y(mac_out)
  );

  // The conversion must finish inside the ADC phase.
  assert property (@(posedge clk) disable iff (!rst_n) cycle_done |-> !u_sar.cmp_en);

endmodule
