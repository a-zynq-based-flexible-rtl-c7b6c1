// tb_record_ctrl: runs the pre/post-trigger controller with a circular
// buffer of 64 words. Samples carry their own index, so every window read
// out can be checked word by word: it must hold the pre_samples samples up
// to and including the one written in the trigger cycle, then the next
// post_samples samples, with tlast on the last word. Checks continuous
// re-arming, triggers refused while not armed, a window as large as the
// buffer, random DMA backpressure, and the readout rate (2 cycles/word).
module tb_record_ctrl;
  import flex_adc_pkg::*;

  localparam int DEPTH = 64, AW = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             rec_arm = 1'b0, rec_continuous = 1'b1;
  logic [CNT_W-1:0] pre_samples = 16'd10, post_samples = 16'd20;
  sample_t          in_sample = '0;
  logic             in_valid = 1'b0, trig = 1'b0;
  logic             mem_we, mem_re;
  logic [AW-1:0]    mem_waddr, mem_raddr;
  sample_t          mem_wdata;
  logic [SAMPLE_W-1:0] mem_rdata;
  logic [AXIS_W-1:0] tdata;
  logic             tvalid, tlast, tready = 1'b1;
  rec_state_e       state;
  logic             window_done, trig_taken, trig_missed;

  int checks = 0, failures = 0;
  int n_idx = 0;                 // samples sent so far
  int exp_first[$];              // index of the first sample of each window
  int exp_len[$];
  int n_windows = 0, n_missed = 0, n_stall = 0;
  bit random_ready = 0;

  record_ctrl #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .rec_arm, .rec_continuous, .pre_samples, .post_samples,
    .in_sample, .in_valid, .trig,
    .mem_we, .mem_waddr, .mem_wdata, .mem_re, .mem_raddr,
    .mem_rdata (sample_t'(mem_rdata)),
    .m_axis_tdata (tdata), .m_axis_tvalid (tvalid), .m_axis_tlast (tlast),
    .m_axis_tready (tready),
    .state, .window_done, .trig_taken, .trig_missed
  );

  circ_buffer #(.DW(SAMPLE_W), .DEPTH(DEPTH)) u_mem (
    .clk, .we (mem_we), .waddr (mem_waddr), .wdata (mem_wdata),
    .re (mem_re), .raddr (mem_raddr), .rdata (mem_rdata)
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

  always @(negedge clk) tready <= random_ready ? ($urandom_range(0, 1) == 1) : 1'b1;

  // sample source: one sample every 3 cycles, value = index
  always @(negedge clk) begin
    if (rst_n && ($urandom_range(0, 2) == 0)) begin
      in_sample <= sample_t'(n_idx);
      in_valid  <= 1'b1;
      n_idx     <= n_idx + 1;
    end else begin
      in_valid  <= 1'b0;
    end
  end

  // window receiver
  int wpos = 0, first_cycle = 0, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (window_done) n_windows++;
    if (trig_missed) n_missed++;
    if (tvalid && !tready) n_stall++;
    if (tvalid && tready) begin
      if (exp_first.size() == 0) check(0, "word with no window expected");
      else begin
        if (wpos == 0) first_cycle = cyc;
        check($signed(tdata) == exp_first[0] + wpos,
              $sformatf("window word %0d: %0d expected %0d", wpos, $signed(tdata), exp_first[0] + wpos));
        check(tlast == (wpos == exp_len[0] - 1), "tlast on the last word only");
        if (tlast) begin
          if (!random_ready)
            check(cyc - first_cycle == 2 * (exp_len[0] - 1),
                  $sformatf("readout took %0d cycles for %0d words", cyc - first_cycle, exp_len[0]));
          void'(exp_first.pop_front());
          void'(exp_len.pop_front());
          wpos = 0;
        end else wpos++;
      end
    end
  end

  // trigger at a negedge; the sample presented in that cycle is included
  task automatic fire_trigger(input bit expect_taken);
    @(negedge clk);
    #1;
    trig = 1'b1;
    if (expect_taken) begin
      // samples 0..n_idx-1 are already written; a valid sample in this
      // cycle (index n_idx-1 after the source's update) is the last pre
      exp_first.push_back(n_idx - int'(pre_samples));
      exp_len.push_back(int'(pre_samples) + int'(post_samples));
    end
    @(posedge clk);
    #1;
    check(trig_taken == expect_taken, $sformatf("trigger taken=%0b expected %0b", trig_taken, expect_taken));
    trig = 1'b0;
  endtask

  task automatic wait_armed();
    while (state != REC_ARMED) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    fire_trigger(0);                       // disarmed: refused
    rec_arm = 1'b1;
    for (int k = 0; k < 10; k++) begin
      wait_armed();
      repeat ($urandom_range(0, 80)) @(negedge clk);
      fire_trigger(1);
      repeat (5) @(negedge clk);
      fire_trigger(0);                     // during post: refused
      while (state != REC_FILL) @(negedge clk);
    end
    // window as large as the buffer, with random backpressure
    random_ready = 1;
    rec_arm = 1'b0;
    @(negedge clk);
    pre_samples  = 16'd24;
    post_samples = 16'd40;
    rec_arm = 1'b1;
    for (int k = 0; k < 5; k++) begin
      wait_armed();
      repeat ($urandom_range(0, 30)) @(negedge clk);
      fire_trigger(1);
      while (state != REC_FILL) @(negedge clk);
    end
    // single-shot: back to idle after the window
    rec_continuous = 1'b0;
    pre_samples  = 16'd0;
    post_samples = 16'd5;
    wait_armed();
    fire_trigger(1);
    while (state != REC_IDLE) @(negedge clk);
    repeat (5) @(negedge clk);
    check(exp_first.size() == 0, "all windows received");
    check(n_windows == 16, $sformatf("%0d windows done", n_windows));
    check(n_missed == 11, $sformatf("%0d missed triggers", n_missed));
    check(n_stall > 0, "backpressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
