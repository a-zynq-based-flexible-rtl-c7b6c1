// flex_adc_top: programmable-logic part of one flexible ADC channel.
//
// One 18-bit SAR converter serves both transient recording and real-time
// streaming:
//   clk_trig_mgr       - external sample clock and trigger inputs, turned
//                        into one-cycle pulses in the clk domain;
//   adc_serial_if      - runs one conversion per sample tick and reads the
//                        result over the converter's serial link;
//   signal_elab        - boxcar low-pass filter and sub-sampler plus running
//                        integral; packets go to the processor's stream FIFO
//                        (AXI-Stream master s_*);
//   transient_recorder - external or level trigger, circular buffer of the
//                        full-rate samples, pre/post-trigger windows sent to
//                        the DMA engine (AXI-Stream master d_*), irq pulse per
//                        window;
//   axis_pkt_mux       - with cfg.rec_to_fifo set, windows go to the stream
//                        FIFO instead, packet by packet between the stream
//                        packets (s_axis_tid = 1 marks window words, 0 stream
//                        packets); the d_* port is then idle. Change
//                        rec_to_fifo only while the recorder is disarmed.
// The configuration registers, the AXI-Stream FIFO and the AXI DMA engine
// are vendor blocks outside this module: cfg comes in as a struct, status
// goes out as a struct with event counters, and the two streams leave as
// AXI-Stream ports. The timing-highway decoder is not included (its coding
// is not given), so the sample clock and trigger come from digital inputs.
//
// Timing: everything runs on clk (a 125 MHz fabric clock is assumed: 125
// cycles per sample at 1 MS/s). A sample reaches the recorder and the
// filters 3 + CNV_CYCLES + t_conv + 36*SCLK_DIV + 2 cycles after the
// ext_clk edge.
module flex_adc_top
  import flex_adc_pkg::*;
#(
  parameter int unsigned DEPTH      = 8192,  // circular buffer, samples
  parameter int unsigned CNV_CYCLES = 2,
  parameter int unsigned SCLK_DIV   = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // timing inputs
  input  logic              ext_clk,
  input  logic              ext_trig,
  // converter serial link
  output logic              adc_cnv,
  output logic              adc_sclk,
  input  logic              adc_sdo,
  input  logic              adc_busy,
  // configuration and status registers
  input  cfg_t              cfg,
  output status_t           status,
  // sub-sampled stream to the AXI-Stream FIFO
  output logic [AXIS_W-1:0] s_axis_tdata,
  output logic              s_axis_tvalid,
  output logic              s_axis_tlast,
  output logic              s_axis_tid,
  input  logic              s_axis_tready,
  // recorded windows to the AXI DMA engine
  output logic [AXIS_W-1:0] d_axis_tdata,
  output logic              d_axis_tvalid,
  output logic              d_axis_tlast,
  input  logic              d_axis_tready,
  // interrupt: a window has been handed to the DMA engine
  output logic              irq,
  // integrated (field) channel at the full sample rate
  output logic signed [INTEG_W-1:0] integral
);

  logic    sample_tick, trig_pulse;
  sample_t sample;
  logic    sample_valid, overrun;
  logic    dropped;
  logic    window_done, trig_taken, trig_missed;
  rec_state_e rec_state;
  // stream packets and recorder output before routing
  logic [AXIS_W-1:0] se_tdata, rec_tdata;
  logic se_tvalid, se_tlast, se_tready;
  logic rec_tvalid, rec_tlast, rec_tready;
  logic mux_b_tready;

  clk_trig_mgr u_ctm (
    .clk, .rst_n, .ext_clk, .ext_trig,
    .sample_tick, .ext_trig_pulse (trig_pulse)
  );

  adc_serial_if #(.CNV_CYCLES(CNV_CYCLES), .SCLK_DIV(SCLK_DIV)) u_adc (
    .clk, .rst_n, .sample_tick,
    .adc_cnv, .adc_sclk, .adc_sdo, .adc_busy,
    .sample, .sample_valid, .overrun
  );

  signal_elab u_se (
    .clk, .rst_n,
    .decim_ratio   (cfg.decim_ratio),
    .stream_en     (cfg.stream_en),
    .integ_clear   (cfg.integ_clear),
    .in_sample     (sample),
    .in_valid      (sample_valid),
    .m_axis_tdata  (se_tdata),
    .m_axis_tvalid (se_tvalid),
    .m_axis_tlast  (se_tlast),
    .m_axis_tready (se_tready),
    .integral,
    .dropped
  );

  transient_recorder #(.DEPTH(DEPTH)) u_rec (
    .clk, .rst_n,
    .rec_arm        (cfg.rec_arm),
    .rec_continuous (cfg.rec_continuous),
    .trig_src       (cfg.trig_src),
    .threshold      (cfg.threshold),
    .pre_samples    (cfg.pre_samples),
    .post_samples   (cfg.post_samples),
    .in_sample      (sample),
    .in_valid       (sample_valid),
    .ext_trig       (trig_pulse),
    .m_axis_tdata   (rec_tdata),
    .m_axis_tvalid  (rec_tvalid),
    .m_axis_tlast   (rec_tlast),
    .m_axis_tready  (rec_tready),
    .state          (rec_state),
    .window_done,
    .trig_taken,
    .trig_missed
  );

  // window routing: DMA port, or merged into the stream FIFO port
  axis_pkt_mux #(.W(AXIS_W)) u_mux (
    .clk, .rst_n,
    .a_tdata  (se_tdata),
    .a_tvalid (se_tvalid),
    .a_tlast  (se_tlast),
    .a_tready (se_tready),
    .b_tdata  (rec_tdata),
    .b_tvalid (rec_tvalid && cfg.rec_to_fifo),
    .b_tlast  (rec_tlast),
    .b_tready (mux_b_tready),
    .m_tdata  (s_axis_tdata),
    .m_tvalid (s_axis_tvalid),
    .m_tlast  (s_axis_tlast),
    .m_tid    (s_axis_tid),
    .m_tready (s_axis_tready)
  );

  always_comb begin
    d_axis_tdata  = rec_tdata;
    d_axis_tlast  = rec_tlast;
    d_axis_tvalid = rec_tvalid && !cfg.rec_to_fifo;
    rec_tready    = cfg.rec_to_fifo ? mux_b_tready : d_axis_tready;
  end

  // status counters (wrap around)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status.trig_taken     <= '0;
      status.windows_done   <= '0;
      status.trig_missed    <= '0;
      status.stream_dropped <= '0;
      status.adc_overruns   <= '0;
      irq                   <= 1'b0;
    end else begin
      irq <= window_done;
      if (trig_taken)  status.trig_taken     <= status.trig_taken + 1'b1;
      if (window_done) status.windows_done   <= status.windows_done + 1'b1;
      if (trig_missed) status.trig_missed    <= status.trig_missed + 1'b1;
      if (dropped)     status.stream_dropped <= status.stream_dropped + 1'b1;
      if (overrun)     status.adc_overruns   <= status.adc_overruns + 1'b1;
    end
  end

  assign status.rec_state = rec_state;

endmodule
