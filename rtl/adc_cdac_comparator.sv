// Behavioural model of the analog front end of the 8b SAR ADC: sample and
// hold, capacitive DAC and comparator (analog).
//
// The CAAT root value (integer charge, full scale FS = 65536*M) is held when
// sample is high at a clock edge.  The comparator is ideal and
// combinational: while cmp_en is high, cmp_out = 1 when the held input is at
// or above the DAC level dac_code/256 of full scale, that is when
// vhold*256 >= dac_code*FS.  With cmp_en low it outputs 0.
//
// Optional linear distortion stands for the fixed error that capacitor
// mismatch and parasitics leave on the analog result (the error that the
// fine-tune stage corrects).  GAIN_PPM scales the input around mid scale
// by (1 + GAIN_PPM/1e6), and OFFSET_Q adds OFFSET_Q/16 of an output LSB.
// Both default to 0, an ideal converter.  Higher-order nonlinearity is not
// modelled.
module adc_cdac_comparator #(
  parameter  int unsigned M        = 1152,
  parameter  int          GAIN_PPM = 0,
  parameter  int          OFFSET_Q = 0,
  localparam int unsigned RW = $clog2(cim_pkg::WSUM * cim_pkg::WSUM * M + 1)
) (
  input  logic                           clk,
  input  logic                           sample,
  input  logic [RW-1:0]                  vin,
  input  logic [cim_pkg::ADC_BITS-1:0]   dac_code,
  input  logic                           cmp_en,
  output logic                           cmp_out
);
  import cim_pkg::*;

  localparam longint unsigned FS = longint'(WSUM) * longint'(WSUM) * longint'(M);

  localparam longint HALF = longint'(FS / 2);

  logic [RW-1:0]      vhold;
  logic signed [63:0] vdist;
  logic signed [63:0] lhs, rhs;

  always_ff @(posedge clk) begin
    if (sample) vhold <= vin;
  end

  always_comb begin
    vdist   = ($signed(64'(vhold)) - HALF) * (64'sd1000000 + 64'(GAIN_PPM)) / 64'sd1000000
              + HALF + 64'(OFFSET_Q) * longint'(FS / 4096);
    lhs     = vdist <<< ADC_BITS;
    rhs     = 64'(dac_code) * 64'(FS);
    cmp_out = cmp_en && (lhs >= rhs);
  end

endmodule
