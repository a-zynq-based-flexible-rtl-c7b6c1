// tb_clk_trig_mgr: drives the external clock and trigger inputs at times
// unrelated to clk and checks one single-cycle pulse per rising edge, three
// clk edges after the input edge, and none on falling edges.
module tb_clk_trig_mgr;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ext_clk = 1'b0, ext_trig = 1'b0;
  logic sample_tick, ext_trig_pulse;
  int checks = 0, failures = 0;
  int n_tick = 0, n_trig = 0;

  clk_trig_mgr dut (.clk, .rst_n, .ext_clk, .ext_trig, .sample_tick, .ext_trig_pulse);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (sample_tick)    n_tick++;
    if (ext_trig_pulse) n_trig++;
  end

  // drive one rising edge on the chosen input, then check latency and width
  task automatic edge_test(input bit on_trig);
    int lat;
    #(3 + $urandom_range(0, 3));      // off the clk grid
    if (on_trig) ext_trig = 1'b1; else ext_clk = 1'b1;
    lat = 0;
    do begin
      @(posedge clk);
      #1;
      lat++;
    end while (!(on_trig ? ext_trig_pulse : sample_tick) && lat < 10);
    check(lat == 3, $sformatf("pulse after %0d clk edges, expected 3", lat));
    @(posedge clk);
    #1;
    check(!(on_trig ? ext_trig_pulse : sample_tick), "pulse lasts one cycle");
    repeat ($urandom_range(2, 6)) @(posedge clk);
    #(2 + $urandom_range(0, 5));
    if (on_trig) ext_trig = 1'b0; else ext_clk = 1'b0;   // falling edge
    repeat ($urandom_range(4, 8)) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 50; i++) edge_test(1'b0);
    for (int i = 0; i < 20; i++) edge_test(1'b1);
    repeat (5) @(posedge clk);
    check(n_tick == 50, $sformatf("%0d sample ticks, expected 50", n_tick));
    check(n_trig == 20, $sformatf("%0d trigger pulses, expected 20", n_trig));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
