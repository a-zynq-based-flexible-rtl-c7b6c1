// level_trigger: region-of-interest detection on the signal itself.
//
// Raises `trig` for one cycle when a sample goes over the programmed
// threshold (sample > threshold, signed compare) after the previous sample
// was at or below it. A signal that stays above the threshold therefore
// gives one trigger per excursion, not one per sample. While `enable` is
// low the module is quiet and forgets the previous sample (the first sample
// after enabling counts as coming from below).
//
// Timing: trig comes the cycle after the in_valid of the crossing sample.
// The paper names the threshold rule ("over a given signal level
// threshold"); triggering on the upward crossing is this design's choice.
module level_trigger
  import flex_adc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    enable,
  input  sample_t threshold,
  input  sample_t in_sample,
  input  logic    in_valid,
  output logic    trig
);

  logic above_prev;
  logic above;

  assign above = in_sample > threshold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      above_prev <= 1'b0;
      trig       <= 1'b0;
    end else begin
      trig <= 1'b0;
      if (!enable) begin
        above_prev <= 1'b0;
      end else if (in_valid) begin
        trig       <= above && !above_prev;
        above_prev <= above;
      end
    end
  end

endmodule
