// tb_signal_elab: feeds random samples and checks every streamed packet
// (decimated sum, 48-bit integral split over two words, tlast on the third)
// against sums computed in the testbench. tready is random, then held low
// long enough to force dropped packets: a dropped packet must be reported
// and the next one must be the group after it. Also checks that the
// stream stops with stream_en low and that AXI-Stream words hold while
// tready is low.
module tb_signal_elab;
  import flex_adc_pkg::*;

  localparam int R = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [CNT_W-1:0]  decim_ratio = CNT_W'(R);
  logic              stream_en = 1'b0;
  logic              integ_clear = 1'b0;
  sample_t           in_sample = '0;
  logic              in_valid = 1'b0;
  logic [AXIS_W-1:0] tdata;
  logic              tvalid, tlast;
  logic              tready = 1'b1;
  logic signed [INTEG_W-1:0] integral;
  logic              dropped;

  int checks = 0, failures = 0;
  int n_drop = 0, n_pkt = 0, n_skipped = 0, n_stall = 0;
  bit hold_low = 0;

  // expected packets, one per group: {sum, integral}
  longint exp_sum[$], exp_int[$];

  signal_elab dut (
    .clk, .rst_n, .decim_ratio, .stream_en, .integ_clear, .in_sample, .in_valid,
    .m_axis_tdata (tdata), .m_axis_tvalid (tvalid), .m_axis_tlast (tlast),
    .m_axis_tready (tready), .integral, .dropped
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random tready, or held low
  always @(negedge clk) tready <= hold_low ? 1'b0 : ($urandom_range(0, 2) != 0);

  // receive packets
  logic [AXIS_W-1:0] w [3];
  int                wi = 0;
  logic [AXIS_W-1:0] prev_data;
  logic              prev_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (dropped) n_drop++;
    if (prev_stall) begin
      check(tvalid && tdata == prev_data, "word holds while tready low");
    end
    prev_stall <= tvalid && !tready;
    prev_data  <= tdata;
    if (tvalid && !tready) n_stall++;
    if (tvalid && tready) begin
      w[wi] = tdata;
      check(tlast == (wi == 2), "tlast on the third word only");
      if (wi == 2) begin
        longint s, it;
        bit found;
        s  = longint'($signed(w[0]));
        it = longint'({w[2][15:0], w[1]});
        it = (it << 16) >>> 16;           // sign-extend 48 bits
        found = 0;
        // the packet must belong to the oldest group not yet seen, or a
        // later one if groups were dropped in between
        while (exp_sum.size() > 0 && !found) begin
          if (exp_sum[0] == s && exp_int[0] == it) found = 1;
          else begin
            n_skipped++;
          end
          void'(exp_sum.pop_front());
          void'(exp_int.pop_front());
        end
        check(found, $sformatf("packet sum=%0d int=%0d matches a group", s, it));
        n_pkt++;
        wi = 0;
      end else wi++;
    end
  end

  longint acc_sum = 0, acc_int = 0;
  int     in_group = 0;

  task automatic feed(input int n);
    for (int i = 0; i < n; i++) begin
      sample_t s;
      s = sample_t'($urandom);
      @(negedge clk);
      in_sample = s;
      in_valid  = 1'b1;
      acc_int  += longint'(s);
      if (stream_en) begin
        acc_sum  += longint'(s);
        in_group++;
        if (in_group == R) begin
          exp_sum.push_back(acc_sum);
          exp_int.push_back(acc_int);
          acc_sum = 0;
          in_group = 0;
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // stream disabled: integral runs, no packets
    feed(35);
    check(n_pkt == 0 && !tvalid, "no packets while stream_en is low");
    @(negedge clk); stream_en = 1'b1;
    feed(2000);
    repeat (20) @(negedge clk);
    check(n_skipped == n_drop, "no loss with free-running tready");
    // tready held low: packets must be dropped and reported
    hold_low = 1;
    feed(100);
    hold_low = 0;
    feed(500);
    repeat (40) @(negedge clk);
    check(n_drop >= 8, $sformatf("%0d drops reported", n_drop));
    check(n_skipped == n_drop, $sformatf("%0d groups skipped, %0d drops reported", n_skipped, n_drop));
    check(n_stall > 0, "backpressure happened");
    check(exp_sum.size() == 0, "every group accounted for");
    // integrator clear
    @(negedge clk); integ_clear = 1'b1;
    @(negedge clk); integ_clear = 1'b0;
    check(integral == 0, "integral cleared");
    acc_int = 0;
    feed(200);
    repeat (40) @(negedge clk);
    check(exp_sum.size() == 0, "every group after clear accounted for");
    check(longint'(integral) == acc_int, "integral after clear");
    $display("packets %0d, drops %0d, stalls %0d", n_pkt, n_drop, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
