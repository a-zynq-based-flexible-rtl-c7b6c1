// flex_adc_pkg: types and constants shared by the flexible ADC channel.
//
// The sample width (18 bits, two's complement) is that of the SAR converter
// the channel is built around. The run-time configuration written by the
// processor into the configuration registers is collected in cfg_t; the
// counters the channel reports back are collected in status_t. Field widths,
// the enum encodings and the stream word width are this design's choices.
package flex_adc_pkg;

  // Converter resolution: 18-bit SAR ADC.
  localparam int unsigned SAMPLE_W = 18;
  // Word width of the two AXI-Stream outputs (to the stream FIFO and the DMA).
  localparam int unsigned AXIS_W   = 32;
  // Width of the sub-sampled (boxcar) sum: 18 bits + up to 14 bits of growth.
  localparam int unsigned DECIM_W  = 32;
  // Integrator accumulator: 10 s at 1 MS/s is 1e7 samples of at most 2^17,
  // i.e. |sum| < 1.4e12 < 2^41; 48 bits leaves margin.
  localparam int unsigned INTEG_W  = 48;
  // Width of run-time counts (pre/post samples, decimation ratio).
  localparam int unsigned CNT_W    = 16;

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Trigger source of the transient recorder.
  typedef enum logic [1:0] {
    TRIG_EXT   = 2'd0,   // external digital trigger input
    TRIG_LEVEL = 2'd1,   // input over threshold (ROI detection)
    TRIG_ANY   = 2'd2    // either of the two
  } trig_src_e;

  // Recorder state, reported in status_t.
  typedef enum logic [2:0] {
    REC_IDLE  = 3'd0,    // disarmed
    REC_FILL  = 3'd1,    // collecting the pre-trigger history
    REC_ARMED = 3'd2,    // history full, waiting for a trigger
    REC_POST  = 3'd3,    // collecting post-trigger samples
    REC_READ  = 3'd4     // sending the window to the DMA engine
  } rec_state_e;

  // Configuration registers (written by the processor).
  typedef struct packed {
    logic [CNT_W-1:0] decim_ratio;     // full-rate samples per streamed sample
    logic             stream_en;       // enable the sub-sampled stream
    logic             integ_clear;     // hold the integrator at zero while 1
    trig_src_e        trig_src;
    sample_t          threshold;       // level trigger threshold
    logic [CNT_W-1:0] pre_samples;     // samples kept before the trigger
    logic [CNT_W-1:0] post_samples;    // samples taken after the trigger
    logic             rec_arm;         // enable the transient recorder
    logic             rec_continuous;  // re-arm after every window
    logic             rec_to_fifo;     // send windows to the stream FIFO, not the DMA
  } cfg_t;

  // Status registers (read by the processor).
  typedef struct packed {
    rec_state_e       rec_state;
    logic [15:0]      trig_taken;      // triggers that started a window
    logic [15:0]      windows_done;    // windows handed to the DMA engine
    logic [15:0]      trig_missed;     // triggers that came while not armed
    logic [15:0]      stream_dropped;  // sub-samples lost to a full stream FIFO
    logic [15:0]      adc_overruns;    // sample ticks lost to a busy converter
  } status_t;

endpackage
