// lpf_decimator: anti-aliasing low-pass filter and sub-sampler for the
// real-time stream.
//
// The filter is a boxcar (moving-sum) filter that is evaluated once per
// output: it adds up `ratio` consecutive full-rate samples and emits the sum,
// then starts over, so the output rate is the input rate divided by ratio
// (1 MS/s / 100 = 10 kHz with the default). The sum carries a gain of
// ratio; the receiver divides by it. The sum is DECIM_W bits wide, enough for
// ratio up to 2^14 with 18-bit samples. A ratio of 0 is treated as 1.
//
// Timing: out_valid pulses for one cycle, the cycle after the in_valid that
// completes a group. The paper asks for low-pass filtering ahead of
// sub-sampling to 10 kHz; the filter type (boxcar) is this design's choice,
// the simplest that does the job.
module lpf_decimator
  import flex_adc_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,      // restart the current group
  input  logic [CNT_W-1:0]          ratio,      // samples per output
  input  sample_t                   in_sample,
  input  logic                      in_valid,
  output logic signed [DECIM_W-1:0] out_sum,
  output logic                      out_valid
);

  logic signed [DECIM_W-1:0] acc;
  logic [CNT_W-1:0]          cnt;
  logic                      last;
  logic signed [DECIM_W-1:0] acc_next;

  always_comb begin
    last     = (cnt + 1'b1 >= ratio);
    acc_next = acc + DECIM_W'(in_sample);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_sum   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        acc <= '0;
        cnt <= '0;
      end else if (in_valid) begin
        if (last) begin
          out_sum   <= acc_next;
          out_valid <= 1'b1;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          acc <= acc_next;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
