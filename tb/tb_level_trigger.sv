// tb_level_trigger: random signals around a threshold; the expected trigger
// (upward crossing, sample > threshold after a sample <= threshold) is
// computed in the testbench and compared cycle by cycle.
module tb_level_trigger;
  import flex_adc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    enable = 1'b0;
  sample_t threshold = 18'sd1000;
  sample_t in_sample = '0;
  logic    in_valid = 1'b0;
  logic    trig;

  int checks = 0, failures = 0, n_trig = 0;

  level_trigger dut (.clk, .rst_n, .enable, .threshold, .in_sample, .in_valid, .trig);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit prev_above = 0, exp;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int phase = 0; phase < 4; phase++) begin
      enable = (phase != 2);
      threshold = (phase == 3) ? -18'sd5000 : 18'sd1000;
      for (int i = 0; i < 3000; i++) begin
        sample_t s;
        bit v;
        s = sample_t'(int'(threshold) + $signed($urandom_range(0, 40)) - 20);
        v = ($urandom_range(0, 3) != 0);
        @(negedge clk);
        in_sample = s;
        in_valid  = v;
        exp = 0;
        if (!enable) prev_above = 0;
        else if (v) begin
          exp = (s > threshold) && !prev_above;
          prev_above = (s > threshold);
        end
        @(negedge clk);
        in_valid = 1'b0;
        check(trig == exp, $sformatf("phase %0d sample %0d: trig %0b expected %0b", phase, s, trig, exp));
        if (trig) n_trig++;
        check(!trig || enable, "quiet while disabled");
      end
    end
    check(n_trig > 100, "triggers happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
