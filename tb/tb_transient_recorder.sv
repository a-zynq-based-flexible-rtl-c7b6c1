// tb_transient_recorder: checks trigger selection and the recorded windows.
// Samples carry their index; a "spike" sample goes over the threshold.
// With the level source a spike must start a window whose last
// pre-trigger sample is the spike; with the external source spikes are
// ignored and the external pulse starts the window; with "either" both
// work. Every window is checked word by word.
module tb_transient_recorder;
  import flex_adc_pkg::*;

  localparam int DEPTH = 128;
  localparam int SPIKE = 120000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             rec_arm = 1'b0, rec_continuous = 1'b1;
  trig_src_e        trig_src = TRIG_LEVEL;
  sample_t          threshold = 18'sd100000;
  logic [CNT_W-1:0] pre_samples = 16'd16, post_samples = 16'd48;
  sample_t          in_sample = '0;
  logic             in_valid = 1'b0, ext_trig = 1'b0;
  logic [AXIS_W-1:0] tdata;
  logic             tvalid, tlast, tready = 1'b1;
  rec_state_e       state;
  logic             window_done, trig_taken, trig_missed;

  int checks = 0, failures = 0;
  int n_idx = 0;
  int vals [int];                 // value of each sample index
  int exp_first[$];
  int n_windows = 0, n_level = 0, n_ext = 0;
  bit spike_next = 0;

  transient_recorder #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .rec_arm, .rec_continuous, .trig_src, .threshold,
    .pre_samples, .post_samples, .in_sample, .in_valid, .ext_trig,
    .m_axis_tdata (tdata), .m_axis_tvalid (tvalid), .m_axis_tlast (tlast),
    .m_axis_tready (tready), .state, .window_done, .trig_taken, .trig_missed
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) tready <= ($urandom_range(0, 3) != 0);

  // sample source: one sample every 2 to 5 cycles
  int gap = 0;
  always @(negedge clk) begin
    in_valid <= 1'b0;
    if (rst_n) begin
      if (gap == 0) begin
        int v;
        v = spike_next ? SPIKE : (n_idx % 50000);
        if (spike_next && trig_src != TRIG_EXT) begin
          exp_first.push_back(n_idx - int'(pre_samples) + 1);
          n_level++;
        end
        spike_next = 0;
        vals[n_idx] = v;
        in_sample <= sample_t'(v);
        in_valid  <= 1'b1;
        n_idx     <= n_idx + 1;
        gap = $urandom_range(1, 4);
      end else gap--;
    end
  end

  int wpos = 0;
  always @(posedge clk) if (rst_n) begin
    if (window_done) n_windows++;
    if (tvalid && tready) begin
      if (exp_first.size() == 0) check(0, "word with no window expected");
      else begin
        check($signed(tdata) == vals[exp_first[0] + wpos],
              $sformatf("word %0d: %0d expected %0d", wpos, $signed(tdata), vals[exp_first[0] + wpos]));
        if (tlast) begin
          check(wpos == int'(pre_samples + post_samples) - 1, "window length");
          void'(exp_first.pop_front());
          wpos = 0;
        end else wpos++;
      end
    end
  end

  task automatic wait_armed();
    while (state != REC_ARMED) @(negedge clk);
  endtask

  task automatic level_event();
    wait_armed();
    repeat ($urandom_range(0, 20)) @(negedge clk);
    spike_next = 1;
    while (state != REC_FILL) @(negedge clk);
  endtask

  task automatic ext_event();
    wait_armed();
    repeat ($urandom_range(0, 20)) @(negedge clk);
    @(negedge clk);
    #1;
    ext_trig = 1'b1;
    exp_first.push_back(n_idx - int'(pre_samples));
    n_ext++;
    @(posedge clk);
    #1;
    ext_trig = 1'b0;
    while (state != REC_FILL) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    rec_arm = 1'b1;
    trig_src = TRIG_LEVEL;
    for (int k = 0; k < 6; k++) level_event();
    // external source: a spike must not trigger
    trig_src = TRIG_EXT;
    wait_armed();
    spike_next = 1;
    repeat (40) @(negedge clk);
    check(state == REC_ARMED, "spike ignored with the external source");
    for (int k = 0; k < 4; k++) ext_event();
    trig_src = TRIG_ANY;
    for (int k = 0; k < 3; k++) begin
      level_event();
      ext_event();
    end
    repeat (10) @(negedge clk);
    check(exp_first.size() == 0, "all windows received");
    check(n_windows == 16, $sformatf("%0d windows", n_windows));
    check(n_level == 9 && n_ext == 7, "level and external windows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
