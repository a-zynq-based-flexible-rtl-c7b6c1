// clk_trig_mgr: clock and trigger management (digital-input path).
//
// The external sample clock and the external trigger arrive as asynchronous
// digital inputs. Each is passed through a two-flip-flop synchronizer and
// its rising edge is turned into a one-cycle pulse in the clk domain:
// sample_tick starts one ADC conversion, ext_trig_pulse is the external
// trigger for the transient recorder. Both pulses come 3 clk cycles after the
// input edge (2 synchronizer stages + edge register).
//
// The paper has this block take clock and trigger either from digital inputs
// or from the timing highway, a single coded signal that carries both. The
// highway coding is not given, so only the digital-input path is built here.
// Edge polarity (rising) is this design's choice.
module clk_trig_mgr (
  input  logic clk,
  input  logic rst_n,
  input  logic ext_clk,         // external sample clock (asynchronous)
  input  logic ext_trig,        // external trigger (asynchronous)
  output logic sample_tick,     // one pulse per ext_clk rising edge
  output logic ext_trig_pulse   // one pulse per ext_trig rising edge
);

  logic [2:0] clk_sync, trig_sync;   // [0],[1]: synchronizer, [2]: previous

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clk_sync       <= '0;
      trig_sync      <= '0;
      sample_tick    <= 1'b0;
      ext_trig_pulse <= 1'b0;
    end else begin
      clk_sync       <= {clk_sync[1:0], ext_clk};
      trig_sync      <= {trig_sync[1:0], ext_trig};
      sample_tick    <= clk_sync[1]  && !clk_sync[2];
      ext_trig_pulse <= trig_sync[1] && !trig_sync[2];
    end
  end

endmodule
