// tb_integrator: compares the accumulator with a running sum kept in the
// testbench over long random runs, including a run of full-scale samples
// long enough to need more than 32 bits, and checks clear.
module tb_integrator;
  import flex_adc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    clear = 1'b0;
  sample_t in_sample = '0;
  logic    in_valid = 1'b0;
  logic signed [INTEG_W-1:0] integral;
  logic    out_valid;

  int checks = 0, failures = 0;
  longint model = 0;

  integrator dut (.clk, .rst_n, .clear, .in_sample, .in_valid, .integral, .out_valid);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(input sample_t s, input bit verify);
    @(negedge clk);
    in_sample = s;
    in_valid  = 1'b1;
    model += longint'(s);
    @(negedge clk);
    in_valid = 1'b0;
    if (verify) begin
      check(out_valid, "out_valid the cycle after in_valid");
      check(longint'(integral) == model,
            $sformatf("integral %0d expected %0d", integral, model));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(integral == 0, "zero after reset");
    for (int i = 0; i < 5000; i++) push(sample_t'($urandom), 1'b1);
    // clear
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    model = 0;
    check(integral == 0, "zero after clear");
    // 100000 full-scale negative samples: -1.3e10, beyond 32 bits
    for (int i = 0; i < 100000; i++) push(-18'sh20000, (i % 1000) == 999);
    check(longint'(integral) == -64'sd13107200000, "wide accumulation");
    for (int i = 0; i < 1000; i++) push(sample_t'($urandom), 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
