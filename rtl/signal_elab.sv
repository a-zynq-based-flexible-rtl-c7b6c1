// signal_elab: programmable input signal elaboration for real-time streaming.
//
// Full-rate samples feed two units in parallel: lpf_decimator (low-pass
// filter and sub-sampler) and integrator (running integral, the derived
// field channel). Each time the decimator completes a group, the decimated
// sum and the current integral are captured together and sent as one
// 3-word packet on an AXI-Stream master that feeds the processor's stream
// FIFO:
//   word 0: decimated sum, sign-extended to 32 bits
//   word 1: integral[31:0]
//   word 2: integral[47:32], sign-extended; tlast = 1
// The packet waits for tready (standard AXI-Stream rules: tdata/tlast hold
// while tvalid && !tready). If the previous packet is still being sent when
// a new group completes, the new one is dropped and `dropped` pulses. With
// stream_en low no packets are started (the integrator keeps running).
//
// Timing: the first word is valid two cycles after the in_valid that closes
// a group; with tready high a packet takes 3 cycles. The packet layout and
// the drop policy are this design's choices.
module signal_elab
  import flex_adc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CNT_W-1:0]  decim_ratio,
  input  logic              stream_en,
  input  logic              integ_clear,
  input  sample_t           in_sample,
  input  logic              in_valid,
  // AXI-Stream master to the stream FIFO
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  output logic              m_axis_tlast,
  input  logic              m_axis_tready,
  // integral channel, full rate
  output logic signed [INTEG_W-1:0] integral,
  output logic              dropped
);

  logic signed [DECIM_W-1:0] dec_sum;
  logic                      dec_valid;
  logic                      int_valid;

  lpf_decimator u_lpf (
    .clk, .rst_n,
    .clear     (!stream_en),
    .ratio     (decim_ratio),
    .in_sample,
    .in_valid,
    .out_sum   (dec_sum),
    .out_valid (dec_valid)
  );

  integrator u_int (
    .clk, .rst_n,
    .clear     (integ_clear),
    .in_sample,
    .in_valid,
    .integral,
    .out_valid (int_valid)
  );

  logic [AXIS_W-1:0] pkt [3];
  logic [1:0]        word;
  logic              busy;
  logic              fire;

  assign fire = m_axis_tvalid && m_axis_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt     <= '{default: '0};
      word    <= '0;
      busy    <= 1'b0;
      dropped <= 1'b0;
    end else begin
      dropped <= 1'b0;
      if (busy && fire) begin
        if (word == 2'd2) begin
          busy <= 1'b0;
          word <= '0;
        end else begin
          word <= word + 1'b1;
        end
      end
      if (dec_valid && stream_en) begin
        if (busy) begin
          dropped <= 1'b1;
        end else begin
          // dec_valid and the integral update of the same sample coincide
          pkt[0] <= AXIS_W'(dec_sum);
          pkt[1] <= integral[31:0];
          pkt[2] <= {{(AXIS_W-(INTEG_W-32)){integral[INTEG_W-1]}},
                     integral[INTEG_W-1:32]};
          busy   <= 1'b1;
          word   <= '0;
        end
      end
    end
  end

  always_comb begin
    m_axis_tvalid = busy;
    m_axis_tdata  = pkt[word];
    m_axis_tlast  = busy && (word == 2'd2);
  end

  // The integrator updates on the same cycle as the decimator output.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    dec_valid |-> int_valid || integ_clear);

endmodule
