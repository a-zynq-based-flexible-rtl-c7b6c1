// integrator: digital time integration of the probe signal.
//
// A magnetic pick-up coil gives dB/dt; the field B is its time integral.
// This module keeps the running sum of the full-rate samples (rectangle
// rule, one sample period per step) in an INTEG_W-bit accumulator, which
// covers the longest integration the application needs (under 10 s at
// 1 MS/s with 18-bit samples, see flex_adc_pkg). The accumulator is the
// second channel the single ADC provides. clear holds it at zero (used
// before a discharge starts).
//
// Timing: integral is updated, and out_valid pulses, the cycle after each
// in_valid. Scaling to tesla (sample period, coil area) is left to the
// receiver. The integration rule and clear behaviour are this design's
// choices; the paper gives only the function.
module integrator
  import flex_adc_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  sample_t                   in_sample,
  input  logic                      in_valid,
  output logic signed [INTEG_W-1:0] integral,
  output logic                      out_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integral  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && !clear;
      if (clear)         integral <= '0;
      else if (in_valid) integral <= integral + INTEG_W'(in_sample);
    end
  end

endmodule
