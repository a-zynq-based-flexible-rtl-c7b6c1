// tb_flex_adc_top: end-to-end test of the ADC channel at its default
// parameters (8192-sample circular buffer), with the converter modelled on
// its serial link, a 125 MHz fabric clock and a 1 MHz external sample clock.
//
// The converter's input is a known function of the conversion index n: a
// ramp, replaced by a spike above the trigger threshold at chosen indices.
// The testbench checks
//  - every recorded window (four of them; 1000 pre + 4000 post samples, the trigger
//    sample included in the pre part) word by word against the input;
//  - every streamed packet: sum of 100 consecutive samples (10 kHz out of
//    1 MHz) and the running integral at the end of its group;
//  - the status counters and one irq per window.
// Mechanisms made to happen and counted: level trigger, external trigger,
// trigger refused while recording, continuous re-arm, DMA backpressure,
// stream packets dropped while the stream FIFO is full, converter overrun
// (sample clock faster than a conversion), integrator clear, and a window
// routed through the stream FIFO between the stream packets (tid = 1).
// Each must happen at least once.
module tb_flex_adc_top;
  import flex_adc_pkg::*;

  localparam int PRE = 1000, POST = 4000, R = 100;
  localparam int SPIKE = 120000;
  localparam int MAXN = 40000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #4 clk = ~clk;                   // 125 MHz with 1 ns units

  logic ext_clk = 1'b0, ext_trig = 1'b0;
  int   half_period = 500;                // 1 MHz sample clock
  always begin
    #(half_period);
    ext_clk = ~ext_clk;
  end

  logic adc_cnv, adc_sclk, adc_sdo, adc_busy;
  cfg_t cfg;
  status_t status;
  logic [AXIS_W-1:0] s_tdata, d_tdata;
  logic s_tvalid, s_tlast, s_tid, s_tready = 1'b1;
  logic d_tvalid, d_tlast, d_tready = 1'b1;
  logic irq;
  logic signed [INTEG_W-1:0] integral;
  sample_t value;
  int conversions;

  flex_adc_top dut (
    .clk, .rst_n, .ext_clk, .ext_trig,
    .adc_cnv, .adc_sclk, .adc_sdo, .adc_busy,
    .cfg, .status,
    .s_axis_tdata (s_tdata), .s_axis_tvalid (s_tvalid), .s_axis_tlast (s_tlast), .s_axis_tid (s_tid),
    .s_axis_tready (s_tready),
    .d_axis_tdata (d_tdata), .d_axis_tvalid (d_tvalid), .d_axis_tlast (d_tlast),
    .d_axis_tready (d_tready),
    .irq, .integral
  );

  adc_model #(.T_CONV(300)) u_adc (
    .cnv (adc_cnv), .sclk (adc_sclk), .value, .sdo (adc_sdo), .busy (adc_busy),
    .conversions
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- input
  bit spikes [int];
  function automatic int val(input int n);
    if (spikes.exists(n)) return SPIKE;
    return (n % 8192) * 8 - 32768;
  endfunction
  longint prefix [MAXN+1];              // prefix[n] = sum of val(0..n-1)
  assign value = sample_t'(val(conversions));

  // ------------------------------------------------------- mechanism counts
  int n_level = 0, n_ext = 0, n_missed = 0, n_rearm = 0, n_dma_stall = 0;
  int n_drop = 0, n_overrun = 0, n_clear = 0, n_irq = 0;

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DMA side: random backpressure
  always @(negedge clk) d_tready <= ($urandom_range(0, 3) != 0);
  bit hold_stream = 0;
  always @(negedge clk) s_tready <= !hold_stream;

  // ------------------------------------------------------ window receiver
  int win_first[$];      // expected index of the first sample, -1: search
  int win_near[$];       // for external triggers: approximate first index
  int wpos = 0, cur_first = 0;
  int n_windows = 0, n_fifo_windows = 0, n_dma_words_in_fifo_mode = 0;

  task automatic window_word(input logic [AXIS_W-1:0] data, input logic last);
    if (win_first.size() == 0) begin
      if (wpos == 0) check(0, "window with no trigger");
    end else begin
      if (wpos == 0) begin
        cur_first = win_first[0];
        if (cur_first < 0) begin
          // external trigger: locate the window within a few samples
          cur_first = -1;
          for (int n = win_near[0] - 3; n <= win_near[0] + 3; n++)
            if (n >= 0 && val(n) == $signed(data)) cur_first = n;
          check(cur_first >= 0, "external-trigger window starts near the trigger");
        end
      end
      check($signed(data) == val(cur_first + wpos),
            $sformatf("window word %0d: %0d expected %0d", wpos, $signed(data),
                      val(cur_first + wpos)));
      check(last == (wpos == PRE + POST - 1), "tlast at the end of the window");
      if (last) begin
        void'(win_first.pop_front());
        void'(win_near.pop_front());
        n_windows++;
        wpos = 0;
      end else wpos++;
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (irq) n_irq++;
    if (d_tvalid && !d_tready) n_dma_stall++;
    if (d_tvalid && cfg.rec_to_fifo) n_dma_words_in_fifo_mode++;
    if (d_tvalid && d_tready) window_word(d_tdata, d_tlast);
  end

  // ------------------------------------------------------ stream receiver
  int next_group = 0, n_pkt = 0, n_skipped = 0, clear_n = -1;
  logic [AXIS_W-1:0] sw [3];
  int swi = 0;
  function automatic longint group_sum(input int g);
    return prefix[(g + 1) * R] - prefix[g * R];
  endfunction
  function automatic longint integral_at(input int last_n);
    if (clear_n >= 0 && last_n >= clear_n) return prefix[last_n + 1] - prefix[clear_n];
    return prefix[last_n + 1];
  endfunction
  always @(posedge clk) if (rst_n) begin
    if (s_tvalid && s_tready && s_tid) begin
      window_word(s_tdata, s_tlast);
      if (s_tlast) n_fifo_windows++;
      check(swi == 0, "window words only between stream packets");
    end else if (s_tvalid && s_tready) begin
      sw[swi] = s_tdata;
      if (swi == 2) begin
        longint s, it;
        bit found;
        s  = longint'($signed(sw[0]));
        it = longint'({sw[2][15:0], sw[1]});
        it = (it << 16) >>> 16;
        found = 0;
        for (int g = next_group; g < next_group + 20 && !found; g++) begin
          if (group_sum(g) == s && integral_at(g * R + R - 1) == it) begin
            n_skipped += g - next_group;
            next_group = g + 1;
            found = 1;
          end
        end
        check(found, $sformatf("packet %0d (sum %0d, integral %0d) matches a group",
                               n_pkt, s, it));
        check(s_tlast, "tlast on the third word");
        n_pkt++;
        swi = 0;
      end else swi++;
    end
  end

  // ---------------------------------------------------------- the run
  task automatic wait_state(input rec_state_e st);
    while (status.rec_state != st) @(negedge clk);
  endtask

  task automatic level_window();
    int n;
    wait_state(REC_ARMED);
    n = conversions + 2;
    spikes[n] = 1;
    for (int m = n; m < MAXN; m++) prefix[m + 1] = prefix[m] + val(m);
    win_first.push_back(n - PRE + 1);
    win_near.push_back(0);
    n_level++;
    wait_state(REC_POST);
  endtask

  task automatic ext_window();
    wait_state(REC_ARMED);
    repeat ($urandom_range(100, 3000)) @(negedge clk);
    ext_trig = 1'b1;
    win_first.push_back(-1);
    win_near.push_back(conversions - PRE);
    n_ext++;
    repeat (20) @(negedge clk);
    ext_trig = 1'b0;
    wait_state(REC_POST);
  endtask

  initial begin
    int missed0, drops0, over0;
    prefix[0] = 0;
    for (int n = 0; n < MAXN; n++) prefix[n + 1] = prefix[n] + val(n);
    cfg = '0;
    cfg.decim_ratio    = 16'(R);
    cfg.stream_en      = 1'b1;
    cfg.trig_src       = TRIG_ANY;
    cfg.threshold      = 18'sd100000;
    cfg.pre_samples    = 16'(PRE);
    cfg.post_samples   = 16'(POST);
    cfg.rec_arm        = 1'b1;
    cfg.rec_continuous = 1'b1;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // window 1: level trigger; an external trigger during it is refused,
    // and the stream FIFO is held full for a while
    level_window();
    missed0 = int'(status.trig_missed);
    repeat (20000) @(negedge clk);
    ext_trig = 1'b1;
    repeat (20) @(negedge clk);
    ext_trig = 1'b0;
    repeat (10) @(negedge clk);
    n_missed += int'(status.trig_missed) - missed0;
    drops0 = int'(status.stream_dropped);
    hold_stream = 1;
    repeat (100000) @(negedge clk);       // 800 us: several packets lost
    hold_stream = 0;
    wait_state(REC_FILL);
    n_rearm++;

    // integrator clear, between two samples
    @(posedge ext_clk);
    repeat (110) @(negedge clk);
    cfg.integ_clear = 1'b1;
    clear_n = conversions;
    @(negedge clk);
    cfg.integ_clear = 1'b0;
    n_clear++;
    check(integral == 0, "integral cleared");

    // converter overrun: sample clock faster than a conversion for a while
    over0 = int'(status.adc_overruns);
    @(posedge ext_clk);
    half_period = 200;
    repeat (20) @(posedge ext_clk);
    half_period = 500;
    @(posedge ext_clk);
    n_overrun = int'(status.adc_overruns) - over0;

    // window 2: external trigger
    ext_window();
    wait_state(REC_FILL);
    n_rearm++;
    // window 3: level trigger again
    level_window();
    wait_state(REC_FILL);
    n_rearm++;
    // window 4: routed to the stream FIFO, between the stream packets
    cfg.rec_arm = 1'b0;
    wait_state(REC_IDLE);
    cfg.rec_to_fifo = 1'b1;
    cfg.rec_arm = 1'b1;
    level_window();
    wait_state(REC_FILL);
    cfg.rec_arm = 1'b0;
    wait_state(REC_IDLE);
    cfg.rec_to_fifo = 1'b0;
    repeat (1000) @(negedge clk);

    n_drop = int'(status.stream_dropped) - drops0;
    check(conversions < MAXN, "run fits the prefix table");
    check(n_windows == 4, $sformatf("%0d windows received", n_windows));
    check(n_dma_words_in_fifo_mode == 0, "DMA port idle while windows go to the FIFO");
    check(win_first.size() == 0, "no window outstanding");
    check(int'(status.windows_done) == 4, "windows_done counter");
    check(int'(status.trig_taken) == 4, "trig_taken counter");
    check(n_irq == 4, $sformatf("%0d interrupts", n_irq));
    check(n_skipped == int'(status.stream_dropped),
          $sformatf("%0d groups missing from the stream, %0d reported dropped",
                    n_skipped, status.stream_dropped));
    check(n_pkt + n_skipped >= conversions / R - 2, "stream kept pace with the input");
    // mechanisms
    check(n_level > 0,     "level trigger happened");
    check(n_ext > 0,       "external trigger happened");
    check(n_missed > 0,    "refused trigger happened");
    check(n_rearm > 0,     "continuous re-arm happened");
    check(n_dma_stall > 0, "DMA backpressure happened");
    check(n_drop > 0,      "stream drop happened");
    check(n_overrun > 0,   "converter overrun happened");
    check(n_clear > 0,     "integrator clear happened");
    check(n_fifo_windows > 0, "window through the stream FIFO happened");
    $display("samples %0d, packets %0d, windows %0d", conversions, n_pkt, n_windows);
    $display("windows via FIFO %0d", n_fifo_windows);
    $display("level %0d ext %0d missed %0d rearm %0d dma_stall %0d drop %0d overrun %0d clear %0d",
             n_level, n_ext, n_missed, n_rearm, n_dma_stall, n_drop, n_overrun, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
