// SAR logic of the ReLU-optimized 8b ADC.
//
// Successive approximation, MSB first, against the comparator of
// adc_cdac_comparator.  The unsigned SAR code u has mid scale 128 at a MAC
// result of zero, so its MSB is the sign.  With relu_en set, a 0 MSB means
// the MAC result is negative and ReLU would clear it anyway, so the
// conversion stops after that single comparison and the result is 0
// (early stop to zero, which saves the remaining seven comparisons).
// Otherwise all 8 bits are resolved and the result is u - 128, clamped to
// 0 from below when relu_en is set.  The early stop follows the paper; the
// step schedule and the ReLU-off mode are this design's choices.
//
// Timing: the logic advances only on cycles with adc_tick high (one ADC
// clock).  start in standby arms it; the next tick samples the input;
// each following tick fires one comparison (cmp_en) on dac_code and reads
// cmp_out in the same cycle.  A full conversion takes 1 + 8 ticks, an early
// stop 1 + 1 ticks.  done pulses for one cycle after the last tick, with
// result, early_stop and n_cmp valid from then until the next start.
module sar_relu_ctrl (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  adc_tick,
  input  logic                  start,
  input  logic                  relu_en,
  output logic                  sample,
  output logic [7:0]            dac_code,
  output logic                  cmp_en,
  input  logic                  cmp_out,
  output logic                  done,
  output logic signed [7:0]     result,
  output logic                  early_stop,
  output logic [3:0]            n_cmp
);

  typedef enum logic [1:0] {S_STANDBY, S_SAMPLE, S_CONV} sar_state_t;

  sar_state_t state;
  logic [7:0] code;      // current trial code (bits above bitn resolved)
  logic [2:0] bitn;      // bit under trial
  logic       relu_q;
  logic [7:0] resolved;  // code with the trial bit decided by cmp_out

  assign sample   = (state == S_SAMPLE) && adc_tick;
  assign cmp_en   = (state == S_CONV) && adc_tick;
  assign dac_code = code;

  always_comb begin
    resolved = code;
    if (!cmp_out) resolved[bitn] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_STANDBY;
      code       <= '0;
      bitn       <= '0;
      relu_q     <= 1'b1;
      done       <= 1'b0;
      result     <= '0;
      early_stop <= 1'b0;
      n_cmp      <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_STANDBY: if (start) begin
          state  <= S_SAMPLE;
          relu_q <= relu_en;
        end
        S_SAMPLE: if (adc_tick) begin
          state      <= S_CONV;
          code       <= 8'h80;
          bitn       <= 3'd7;
          n_cmp      <= '0;
          early_stop <= 1'b0;
        end
        S_CONV: if (adc_tick) begin
          n_cmp <= n_cmp + 4'd1;
          if (bitn == 3'd7 && relu_q && !cmp_out) begin
            // negative MAC: ReLU output is zero, skip the other bits
            state      <= S_STANDBY;
            early_stop <= 1'b1;
            result     <= '0;
            done       <= 1'b1;
          end else if (bitn == 3'd0) begin
            state  <= S_STANDBY;
            result <= (relu_q && !resolved[7]) ? 8'sd0 : signed'(resolved ^ 8'h80);
            done   <= 1'b1;
          end else begin
            code           <= resolved;
            code[bitn - 1] <= 1'b1;
            bitn           <= bitn - 3'd1;
          end
        end
        default: state <= S_STANDBY;
      endcase
    end
  end

  // A comparison is only fired while a conversion is in progress.
  assert property (@(posedge clk) disable iff (!rst_n) cmp_en |-> state == S_CONV);

endmodule
