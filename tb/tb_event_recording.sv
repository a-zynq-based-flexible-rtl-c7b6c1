// tb_event_recording: the event-acquisition workload. The input is a run of
// breakdown-like events (a step to a high level that decays back to the
// baseline) at irregular spacing, with noise. The channel runs at its
// default parameters with the level trigger in continuous mode and a
// 1,000 + 4,000 sample window, which is the window length used for the event
// captures. Some events come while a window is still being recorded or read
// out; those must be counted as missed rather than start a window. The
// window length follows the application; the event shape, spacing and
// noise, and the 1 MS/s rate of the serial converter, are this testbench's
// choice.
//
// Checks: every window read by the DMA port equals the input around its
// triggering sample, word by word; each event either gives one window or
// one missed trigger; windows keep arriving for the whole run; the stream
// keeps flowing without loss alongside.
module tb_event_recording;
  import flex_adc_pkg::*;

  localparam int N = 150000;
  localparam int PRE = 1000, POST = 4000, WIN = PRE + POST;
  localparam int THR = 30000;
  localparam int AMP = 100000;
  localparam int TAU = 1500;               // decay time constant, samples
  localparam int MAXEV = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #4 clk = ~clk;
  logic ext_clk = 1'b0;
  always #500 ext_clk = ~ext_clk;

  logic adc_cnv, adc_sclk, adc_sdo, adc_busy;
  cfg_t cfg;
  status_t status;
  logic [AXIS_W-1:0] s_tdata, d_tdata;
  logic s_tvalid, s_tlast, s_tid, d_tvalid, d_tlast, irq;
  logic signed [INTEG_W-1:0] integral;
  sample_t value;
  int conversions;

  flex_adc_top dut (
    .clk, .rst_n, .ext_clk, .ext_trig (1'b0),
    .adc_cnv, .adc_sclk, .adc_sdo, .adc_busy, .cfg, .status,
    .s_axis_tdata (s_tdata), .s_axis_tvalid (s_tvalid), .s_axis_tlast (s_tlast),
    .s_axis_tid (s_tid), .s_axis_tready (1'b1),
    .d_axis_tdata (d_tdata), .d_axis_tvalid (d_tvalid), .d_axis_tlast (d_tlast),
    .d_axis_tready (1'b1), .irq, .integral
  );

  adc_model #(.T_CONV(300)) u_adc (
    .cnv (adc_cnv), .sclk (adc_sclk), .value, .sdo (adc_sdo), .busy (adc_busy), .conversions
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (25_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sig [N + 1000];
  int ev_at [MAXEV];
  int n_ev = 0;
  assign value = sample_t'(sig[conversions < N + 1000 ? conversions : 0]);

  // Index of the first sample above the threshold after a rising crossing,
  // searched from a given point; the recorder window is centred on it.
  function automatic int next_crossing(input int from);
    for (int n = (from < 1 ? 1 : from); n < N; n++)
      if (sig[n] > THR && sig[n - 1] <= THR) return n;
    return -1;
  endfunction

  // DMA receiver: collect one window, then compare it with the input
  int wn = 0, n_win = 0, search_from = 0, bad_win = 0, skipped = 0;
  logic [SAMPLE_W-1:0] win [WIN];
  always @(posedge clk) if (rst_n && d_tvalid) begin
    win[wn] = d_tdata[SAMPLE_W-1:0];
    check(d_tlast == (wn == WIN - 1), $sformatf("window %0d tlast at word %0d", n_win, wn));
    if (wn == WIN - 1) begin
      int c, mism;
      // the window belongs to the first later crossing it matches; crossings
      // passed over on the way were missed by the recorder
      mism = WIN;
      c = next_crossing(search_from);
      while (c >= 0 && mism != 0) begin
        mism = 0;
        if (c < PRE) mism = WIN;
        else
          for (int k = 0; k < WIN; k++)
            if ($signed(win[k]) != sig[c - PRE + 1 + k]) mism++;
        if (mism != 0) begin
          skipped++;
          c = next_crossing(c + 1);
        end
      end
      check(mism == 0 && c >= 0, $sformatf("window %0d matches a crossing", n_win));
      if (mism != 0) bad_win++;
      search_from = c + 1;
      n_win++;
      wn = 0;
    end else wn++;
  end

  // stream keeps running: count packets
  int s_words = 0;
  always @(posedge clk) if (rst_n && s_tvalid) s_words++;

  initial begin
    int t, crossings;
    // event times: irregular spacing of 3,000 to 12,000 samples
    t = 4000;
    while (t < N - WIN - 2000 && n_ev < MAXEV) begin
      ev_at[n_ev++] = t;
      t += int'($urandom_range(3000, 12000));
    end
    for (int n = 0; n < N + 1000; n++) sig[n] = int'($urandom_range(0, 16)) - 8;
    for (int e = 0; e < n_ev; e++)
      for (int n = ev_at[e]; n < N + 1000; n++) begin
        real v;
        v = real'(AMP) * $exp(-real'(n - ev_at[e]) / real'(TAU));
        if (v < 1.0) break;
        sig[n] += int'(v);
      end
    for (int n = 0; n < N + 1000; n++) if (sig[n] > 131071) sig[n] = 131071;
    crossings = 0;
    for (int n = 1; n < N; n++) if (sig[n] > THR && sig[n - 1] <= THR) crossings++;

    cfg = '0;
    cfg.decim_ratio    = 16'd100;
    cfg.stream_en      = 1'b1;
    cfg.trig_src       = TRIG_LEVEL;
    cfg.threshold      = sample_t'(THR);
    cfg.pre_samples    = 16'(PRE);
    cfg.post_samples   = 16'(POST);
    cfg.rec_arm        = 1'b1;
    cfg.rec_continuous = 1'b1;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    while (conversions < N) @(posedge clk);
    repeat (2000) @(posedge clk);

    $display("%0d events, %0d crossings, %0d windows, %0d missed triggers",
             n_ev, crossings, n_win, status.trig_missed);
    check(crossings == n_ev, "one crossing per event");
    check(int'(status.trig_taken) == n_win || int'(status.trig_taken) == n_win + 1,
          "every taken trigger gives a window (the last may still be open)");
    check(int'(status.trig_taken) + int'(status.trig_missed) == crossings,
          "every event is either recorded or counted as missed");
    check(skipped <= int'(status.trig_missed),
          "events passed over between windows were counted as missed");
    check(status.trig_missed > 0, "some events arrived while busy");
    check(n_win >= n_ev / 2, "windows kept coming through the run");
    check(int'(status.windows_done) == n_win, "window counter matches the DMA side");
    check(bad_win == 0, "all windows exact");
    check(status.stream_dropped == 0, "stream not disturbed by the recorder");
    check(s_words >= 3 * (N / 100 - 2), $sformatf("stream words %0d", s_words));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
