// tb_adc_serial_if: checks the converter interface against the behavioural
// converter model: every conversion returns the value the model sampled,
// the serial phase takes 36*SCLK_DIV + 1 cycles from the fall of busy to
// the result, and a tick during a conversion is reported as an overrun.
module tb_adc_serial_if;
  import flex_adc_pkg::*;

  localparam int SCLK_DIV = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    sample_tick = 1'b0;
  logic    cnv, sclk, sdo, busy;
  sample_t value = '0;
  sample_t sample;
  logic    sample_valid, overrun;
  int      conversions;

  int checks = 0, failures = 0;

  adc_serial_if #(.CNV_CYCLES(2), .SCLK_DIV(SCLK_DIV)) dut (
    .clk, .rst_n, .sample_tick,
    .adc_cnv (cnv), .adc_sclk (sclk), .adc_sdo (sdo), .adc_busy (busy),
    .sample, .sample_valid, .overrun
  );

  adc_model #(.T_CONV(203)) u_adc (
    .cnv, .sclk, .value, .sdo, .busy, .conversions
  );

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
    sample_t expect_v;
    int      t_busy_fall, t_valid, n_over;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      if (i == 0)      expect_v = 18'sh1FFFF;      // most positive
      else if (i == 1) expect_v = -18'sh20000;     // most negative
      else             expect_v = sample_t'($urandom);
      value = expect_v;
      @(negedge clk);
      sample_tick = 1'b1;
      @(negedge clk);
      sample_tick = 1'b0;
      // wait for busy high then low, counting cycles
      while (!busy) @(negedge clk);
      while (busy) @(negedge clk);
      t_busy_fall = 0;
      t_valid = 0;
      // the negedge after busy fell: the DUT sees busy low at the next posedge
      while (!sample_valid) begin
        @(negedge clk);
        t_valid++;
      end
      check(sample == expect_v, $sformatf("sample %0d: got %0d expected %0d", i, sample, expect_v));
      check(t_valid == 36 * SCLK_DIV + 1,
            $sformatf("serial phase took %0d cycles, expected %0d", t_valid, 36 * SCLK_DIV + 1));
    end
    check(conversions == 200, "one conversion per tick");
    // ticks during a conversion are overruns
    n_over = 0;
    @(negedge clk);
    sample_tick = 1'b1;
    @(negedge clk);
    sample_tick = 1'b0;
    repeat (10) @(negedge clk);
    sample_tick = 1'b1;                      // during the conversion
    @(negedge clk);
    sample_tick = 1'b0;
    if (overrun) n_over++;
    repeat (200) begin
      @(negedge clk);
      if (overrun) n_over++;
    end
    check(n_over == 1, $sformatf("overrun pulses %0d, expected 1", n_over));
    check(conversions == 201, "tick during conversion does not start another");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
