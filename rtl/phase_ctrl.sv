// Phase controller of one CiM cycle.
//
// One start runs the sequence Reset -> Coupling (S1) -> CAAT-L (S2) ->
// CAAT-R (S3) -> ADC -> Idle.  Coupling is the in-column summation (cells
// couple onto their source lines), CAAT-L the in-bank summation and CAAT-R
// the in-array summation; the three switches are never on together.
// Default lengths, in 1 GHz core cycles, split a 45-cycle CiM cycle by the
// latency shares the paper reports (reset 7%, coupling 7%, CAAT-L 22%,
// CAAT-R 4%, ADC 53%, idle 7%).  45 cycles at 1 GHz is what one 1152-long
// 8b MAC (2304 operations) per cycle needs for 51.2 GOPS.  The whole-cycle
// rounding is this design's choice.
//
// The ADC runs at half the core clock: in the ADC phase, adc_tick is high
// on every second core cycle (odd counts), 12 ticks in 24 cycles.
// adc_start pulses in the first ADC cycle.  cycle_done pulses in the last
// Idle cycle; if start is high then, the next cycle follows directly, so a
// held start gives one MAC every 45 cycles.
module phase_ctrl #(
  parameter int unsigned RESET_CYC  = 3,
  parameter int unsigned COUPLE_CYC = 3,
  parameter int unsigned LEAF_CYC   = 10,
  parameter int unsigned ROOT_CYC   = 2,
  parameter int unsigned ADC_CYC    = 24,
  parameter int unsigned IDLE_CYC   = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output cim_pkg::phase_t phase,
  output logic            rst_sw,
  output logic            s1,
  output logic            s2,
  output logic            s3,
  output logic            adc_start,
  output logic            adc_tick,
  output logic            busy,
  output logic            cycle_done
);
  import cim_pkg::*;

  logic [7:0] cnt;
  logic [7:0] len;
  logic       last;

  always_comb begin
    unique case (phase)
      PH_RESET:  len = 8'(RESET_CYC);
      PH_COUPLE: len = 8'(COUPLE_CYC);
      PH_LEAF:   len = 8'(LEAF_CYC);
      PH_ROOT:   len = 8'(ROOT_CYC);
      PH_ADC:    len = 8'(ADC_CYC);
      PH_IDLE:   len = 8'(IDLE_CYC);
      default:   len = 8'd1;
    endcase
    last = (cnt == len - 8'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_STANDBY;
      cnt   <= '0;
    end else if (phase == PH_STANDBY) begin
      cnt <= '0;
      if (start) phase <= PH_RESET;
    end else if (last) begin
      cnt <= '0;
      unique case (phase)
        PH_RESET:  phase <= PH_COUPLE;
        PH_COUPLE: phase <= PH_LEAF;
        PH_LEAF:   phase <= PH_ROOT;
        PH_ROOT:   phase <= PH_ADC;
        PH_ADC:    phase <= PH_IDLE;
        PH_IDLE:   phase <= start ? PH_RESET : PH_STANDBY;
        default:   phase <= PH_STANDBY;
      endcase
    end else begin
      cnt <= cnt + 8'd1;
    end
  end

  assign rst_sw     = (phase == PH_RESET);
  assign s1         = (phase == PH_COUPLE);
  assign s2         = (phase == PH_LEAF);
  assign s3         = (phase == PH_ROOT);
  assign adc_start  = (phase == PH_ADC) && (cnt == 8'd0);
  assign adc_tick   = (phase == PH_ADC) && cnt[0];
  assign busy       = (phase != PH_STANDBY);
  assign cycle_done = (phase == PH_IDLE) && last;

  // The three summation switches are mutually exclusive.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0({rst_sw, s1, s2, s3}));

endmodule
