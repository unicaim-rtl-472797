// sar_adc: behavioural model of one successive-approximation ADC of the current-domain
// CIM.
//
// This is a behavioural model of a mixed-signal part: the sense-line current (integer
// units, one unit = one LSB) is sampled on start and converted MSB first, one bit per
// clock, by comparing it with the trial code of an ideal internal DAC. The result is the
// input clipped to 2^B - 1. The paper uses a 10-bit SAR ADC; clocking one bit per cycle
// and the unit LSB are this design's choices.
// Timing: vin is sampled at the clock edge where start is high; the B bit decisions take
// the next B clocks, so done is high for one clock B+1 clocks after start, with code valid.
module sar_adc #(
  parameter int unsigned B  = 10,
  parameter int unsigned IW = 11
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [IW-1:0] vin,
  output logic [B-1:0]  code,
  output logic          done
);
  logic [IW-1:0]        v_hold;      // sample-and-hold
  logic [B-1:0]         trial_bit;   // one-hot bit under test
  logic                 active;
  logic [B-1:0]         trial;

  assign trial = code | trial_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_hold    <= '0;
      trial_bit <= '0;
      active    <= 1'b0;
      code      <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        v_hold    <= vin;
        code      <= '0;
        trial_bit <= B'(1) << (B - 1);
        active    <= 1'b1;
      end else if (active) begin
        if ((IW+B)'(v_hold) >= (IW+B)'(trial)) code <= trial;   // comparator decision
        trial_bit <= trial_bit >> 1;
        if (trial_bit[0]) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
