// tb_lpf_decimator: feeds random samples at random intervals and compares
// each output with the sum of the group computed in the testbench, for the
// default 1 MS/s -> 10 kHz ratio of 100 and for other ratios; also checks
// the output pulse follows the closing sample by one cycle and that clear
// restarts a group.
module tb_lpf_decimator;
  import flex_adc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                      clear = 1'b0;
  logic [CNT_W-1:0]          ratio = 16'd100;
  sample_t                   in_sample = '0;
  logic                      in_valid = 1'b0;
  logic signed [DECIM_W-1:0] out_sum;
  logic                      out_valid;

  int checks = 0, failures = 0;
  longint exp_q[$];
  int n_out = 0;

  lpf_decimator dut (.clk, .rst_n, .clear, .ratio, .in_sample, .in_valid, .out_sum, .out_valid);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit last_was_closing = 0;
  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      n_out++;
      check(last_was_closing, "output one cycle after the closing sample");
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        longint e;
        e = exp_q.pop_front();
        check(longint'(out_sum) == e, $sformatf("sum %0d expected %0d", out_sum, e));
      end
    end
  end

  task automatic run_groups(input int r, input int groups, input bit use_max);
    longint acc;
    ratio = CNT_W'(r);
    for (int g = 0; g < groups; g++) begin
      acc = 0;
      for (int i = 0; i < (r == 0 ? 1 : r); i++) begin
        sample_t s;
        s = use_max ? sample_t'(18'sh1FFFF) : sample_t'($urandom);
        acc += longint'(s);
        @(negedge clk);
        in_sample = s;
        in_valid  = 1'b1;
        if (i == (r == 0 ? 1 : r) - 1) exp_q.push_back(acc);
        last_was_closing = (i == (r == 0 ? 1 : r) - 1);
        @(negedge clk);
        in_valid = 1'b0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
        last_was_closing = 0;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_groups(100, 20, 0);
    run_groups(7, 30, 0);
    run_groups(1, 10, 0);
    run_groups(0, 5, 0);
    run_groups(16384, 1, 1);          // largest growth: 2^14 * (2^17-1)
    // clear in the middle of a group discards the partial sum
    ratio = 16'd5;
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); in_sample = 18'sd1000; in_valid = 1'b1;
      @(negedge clk); in_valid = 1'b0;
    end
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    exp_q.push_back(5 * 7);
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); in_sample = 18'sd7; in_valid = 1'b1; last_was_closing = (i == 4);
      @(negedge clk); in_valid = 1'b0;
    end
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, "all groups produced");
    check(n_out == 20 + 30 + 10 + 5 + 1 + 1, $sformatf("%0d outputs", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
