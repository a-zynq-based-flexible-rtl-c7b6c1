// transient_recorder: triggering logic and circular buffer.
//
// Combines the trigger sources with the pre/post-trigger recorder. The
// trigger is the external trigger pulse (from clk_trig_mgr), the level
// trigger (level_trigger, sample over threshold) or either of them, as
// selected by trig_src. The selected trigger drives record_ctrl, which
// keeps the sample history in circ_buffer and hands each pre/post window to
// the DMA engine over an AXI-Stream master, pulsing window_done (the
// interrupt) when a window has gone out.
//
// Timing: a level trigger comes one cycle after its crossing sample, so when
// samples are at least two cycles apart (always so with the serial ADC) the
// crossing sample is the last pre-trigger sample of the window. See
// record_ctrl for the window and stream timing.
module transient_recorder
  import flex_adc_pkg::*;
#(
  parameter int unsigned DEPTH = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rec_arm,
  input  logic              rec_continuous,
  input  trig_src_e         trig_src,
  input  sample_t           threshold,
  input  logic [CNT_W-1:0]  pre_samples,
  input  logic [CNT_W-1:0]  post_samples,
  input  sample_t           in_sample,
  input  logic              in_valid,
  input  logic              ext_trig,
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  output logic              m_axis_tlast,
  input  logic              m_axis_tready,
  output rec_state_e        state,
  output logic              window_done,
  output logic              trig_taken,
  output logic              trig_missed
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic    lvl_trig;
  logic    trig;
  logic    mem_we, mem_re;
  logic [AW-1:0] mem_waddr, mem_raddr;
  sample_t mem_wdata;
  logic [SAMPLE_W-1:0] mem_rdata;

  level_trigger u_lvl (
    .clk, .rst_n,
    .enable    (rec_arm && trig_src != TRIG_EXT),
    .threshold,
    .in_sample,
    .in_valid,
    .trig      (lvl_trig)
  );

  always_comb begin
    unique case (trig_src)
      TRIG_EXT:   trig = ext_trig;
      TRIG_LEVEL: trig = lvl_trig;
      default:    trig = ext_trig || lvl_trig;
    endcase
  end

  record_ctrl #(.DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n,
    .rec_arm, .rec_continuous, .pre_samples, .post_samples,
    .in_sample, .in_valid, .trig,
    .mem_we, .mem_waddr, .mem_wdata,
    .mem_re, .mem_raddr, .mem_rdata (sample_t'(mem_rdata)),
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tlast, .m_axis_tready,
    .state, .window_done, .trig_taken, .trig_missed
  );

  circ_buffer #(.DW(SAMPLE_W), .DEPTH(DEPTH)) u_buf (
    .clk,
    .we    (mem_we),
    .waddr (mem_waddr),
    .wdata (mem_wdata),
    .re    (mem_re),
    .raddr (mem_raddr),
    .rdata (mem_rdata)
  );

endmodule
