// record_ctrl: pre/post-trigger sampling logic of the transient recorder.
//
// Full-rate samples are written round-robin into the circular buffer
// (circ_buffer). The controller steps through the states of rec_state_e:
//   REC_IDLE  - disarmed; nothing is written.
//   REC_FILL  - armed; writes samples until pre_samples of history are held.
//   REC_ARMED - keeps overwriting the oldest sample, waits for trig.
//   REC_POST  - after trig, writes post_samples more samples.
//   REC_READ  - reads the window (pre_samples before the trigger, then
//               post_samples after it, oldest first) out of the buffer and
//               sends it on an AXI-Stream master to the DMA engine, one
//               sample per word, sign-extended to 32 bits, tlast on the last.
// When the window has been sent, window_done pulses (the interrupt to the
// processor) and the controller goes back to REC_FILL if rec_continuous
// and rec_arm are set, otherwise to REC_IDLE. Writing stops during REC_READ,
// so the pre-trigger history is rebuilt after each window. A trigger that
// arrives outside REC_ARMED is not taken and pulses trig_missed. Dropping
// rec_arm returns to REC_IDLE at once, except in REC_READ, which finishes.
// The sample written in the cycle the trigger arrives counts as the last
// pre-trigger sample.
//
// Timing: one word per two cycles in REC_READ (read issue, then data held
// until tready), well above any sample rate of the ADC. pre_samples +
// post_samples must not exceed DEPTH. The paper gives the function
// (circular buffer, pre/post trigger samples, DMA transfer after the
// trigger); the states, the stop-while-reading policy and the stream format
// are this design's choices.
module record_ctrl
  import flex_adc_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              rec_arm,
  input  logic              rec_continuous,
  input  logic [CNT_W-1:0]  pre_samples,
  input  logic [CNT_W-1:0]  post_samples,
  // samples and trigger
  input  sample_t           in_sample,
  input  logic              in_valid,
  input  logic              trig,
  // circular buffer ports
  output logic              mem_we,
  output logic [AW-1:0]     mem_waddr,
  output sample_t           mem_wdata,
  output logic              mem_re,
  output logic [AW-1:0]     mem_raddr,
  input  sample_t           mem_rdata,
  // AXI-Stream master to the DMA engine
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  output logic              m_axis_tlast,
  input  logic              m_axis_tready,
  // status
  output rec_state_e        state,
  output logic              window_done,
  output logic              trig_taken,
  output logic              trig_missed
);

  logic [AW-1:0]    wptr;        // next write address
  logic [CNT_W-1:0] cnt;         // fill / post / read counter
  logic [AW-1:0]    rd_start;    // address of the oldest sample of the window
  logic [CNT_W:0]   win_len;
  logic             rd_pending;  // read issued, data arrives next cycle
  logic             writing;

  assign writing   = in_valid && (state inside {REC_FILL, REC_ARMED}
                                || (state == REC_POST && cnt < post_samples));
  assign mem_we    = writing;
  assign mem_waddr = wptr;
  assign mem_wdata = in_sample;
  assign win_len   = {1'b0, pre_samples} + {1'b0, post_samples};

  assign m_axis_tdata = AXIS_W'(mem_rdata);   // sign-extends (sample_t is signed)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= REC_IDLE;
      wptr          <= '0;
      cnt           <= '0;
      rd_start      <= '0;
      rd_pending    <= 1'b0;
      mem_re        <= 1'b0;
      mem_raddr     <= '0;
      m_axis_tvalid <= 1'b0;
      m_axis_tlast  <= 1'b0;
      window_done   <= 1'b0;
      trig_taken    <= 1'b0;
      trig_missed   <= 1'b0;
    end else begin
      window_done <= 1'b0;
      trig_taken  <= 1'b0;
      trig_missed <= trig && (state != REC_ARMED);
      mem_re      <= 1'b0;
      if (writing) wptr <= wptr + 1'b1;

      unique case (state)
        REC_IDLE: begin
          if (rec_arm) begin
            cnt   <= '0;
            state <= REC_FILL;
          end
        end
        REC_FILL: begin
          if (!rec_arm) state <= REC_IDLE;
          else if (cnt >= pre_samples) state <= REC_ARMED;
          else if (in_valid) cnt <= cnt + 1'b1;
        end
        REC_ARMED: begin
          if (!rec_arm) state <= REC_IDLE;
          else if (trig) begin
            trig_taken <= 1'b1;
            // oldest pre-trigger sample; a sample written now is included
            rd_start   <= wptr + AW'(in_valid) - AW'(pre_samples);
            cnt        <= '0;
            state      <= REC_POST;
          end
        end
        REC_POST: begin
          if (!rec_arm) state <= REC_IDLE;
          else if (cnt >= post_samples) begin
            cnt       <= '0;
            mem_re    <= 1'b1;
            mem_raddr <= rd_start;
            rd_pending <= 1'b1;
            state     <= (win_len == 0) ? REC_IDLE : REC_READ;
          end
          else if (in_valid) cnt <= cnt + 1'b1;
        end
        REC_READ: begin
          if (rd_pending) begin
            rd_pending    <= 1'b0;
            m_axis_tvalid <= 1'b1;
            m_axis_tlast  <= ({1'b0, cnt} + 1'b1 == win_len);
          end else if (m_axis_tvalid && m_axis_tready) begin
            m_axis_tvalid <= 1'b0;
            m_axis_tlast  <= 1'b0;
            if (m_axis_tlast) begin
              window_done <= 1'b1;
              cnt         <= '0;
              state       <= (rec_arm && rec_continuous) ? REC_FILL : REC_IDLE;
            end else begin
              cnt        <= cnt + 1'b1;
              mem_re     <= 1'b1;
              mem_raddr  <= mem_raddr + 1'b1;
              rd_pending <= 1'b1;
            end
          end
        end
        default: state <= REC_IDLE;
      endcase
    end
  end

  // AXI-Stream: data and last stay put while valid waits for ready.
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata)
                                        && $stable(m_axis_tlast));
  // The window must fit in the buffer.
  a_win_fits: assert property (@(posedge clk) disable iff (!rst_n)
    state == REC_ARMED |-> win_len <= (CNT_W+1)'(DEPTH));

endmodule
