// tb_probe_integration: the field-reconstruction workload. A pick-up coil
// signal (dB/dt) is made of eight positive pulses, a quiet plateau and eight
// negative pulses of the same area, on top of a small deterministic noise,
// like a field switched on in steps and switched off again. It is fed
// through the converter model into the full channel at its default
// parameters (1 MS/s, 10 kHz stream). The time axis is compressed 50 times
// (10 s of field become 200 ms, 200,000 samples) to keep the run short.
// The rates and the integration over a field pulse follow the application;
// the pulse shape, count, spacing and noise are this testbench's choice.
//
// Checks: every streamed packet carries the exact boxcar sum and exact
// integral of the samples so far; the integral rises in eight steps, holds
// on the plateau, and returns to the noise-only sum at the end; no packet is
// lost; 2,000 packets arrive (10 kHz for 200 ms).
module tb_probe_integration;
  import flex_adc_pkg::*;

  localparam int N = 200000, R = 100;
  localparam int PW = 2000;                // pulse width, samples
  localparam int PA = 4000;                // pulse peak, LSB

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
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // signal: triangular pulses + noise in [-20, 20]
  int     sig    [N + 1000];
  longint prefix [N + 1001];
  longint noise_sum [N + 1001];
  int     starts [16];
  function automatic int pulse_shape(input int k);     // pulse shape, k in [0, PW)
    return (k < PW / 2) ? (PA * k) / (PW / 2) : (PA * (PW - k)) / (PW / 2);
  endfunction
  assign value = sample_t'(sig[conversions < N + 1000 ? conversions : 0]);

  // stream receiver
  int n_pkt = 0, wi = 0;
  logic [AXIS_W-1:0] w [3];
  longint int_at_pkt [N / R];
  always @(posedge clk) if (rst_n && s_tvalid) begin
    w[wi] = s_tdata;
    if (wi == 2) begin
      longint s, it, e_s, e_i;
      s  = longint'($signed(w[0]));
      it = longint'({w[2][15:0], w[1]});
      it = (it << 16) >>> 16;
      e_s = prefix[(n_pkt + 1) * R] - prefix[n_pkt * R];
      e_i = prefix[(n_pkt + 1) * R];
      check(s == e_s, $sformatf("packet %0d sum %0d expected %0d", n_pkt, s, e_s));
      check(it == e_i, $sformatf("packet %0d integral %0d expected %0d", n_pkt, it, e_i));
      if (n_pkt < N / R) int_at_pkt[n_pkt] = it;
      n_pkt++;
      wi = 0;
    end else wi++;
  end

  initial begin
    longint area, plateau;
    // 8 up pulses from sample 27,000, 8 down pulses from 96,000 (the
    // compressed positions of the steps of a switched field)
    for (int k = 0; k < 8; k++) starts[k] = 27000 + k * 3600;
    for (int k = 0; k < 8; k++) starts[8 + k] = 96000 + k * 1800;
    for (int n = 0; n < N + 1000; n++) sig[n] = int'($urandom_range(0, 40)) - 20;
    noise_sum[0] = 0;
    for (int n = 0; n < N + 1000; n++) noise_sum[n + 1] = noise_sum[n] + sig[n];
    for (int k = 0; k < 16; k++)
      for (int j = 0; j < PW; j++) sig[starts[k] + j] += (k < 8) ? pulse_shape(j) : -pulse_shape(j);
    prefix[0] = 0;
    for (int n = 0; n < N + 1000; n++) prefix[n + 1] = prefix[n] + sig[n];
    area = 0;
    for (int j = 0; j < PW; j++) area += pulse_shape(j);

    cfg = '0;
    cfg.decim_ratio = 16'(R);
    cfg.stream_en   = 1'b1;
    cfg.integ_clear = 1'b0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    while (n_pkt < N / R) @(posedge clk);

    // steps: after each up pulse the integral has grown by one pulse area
    for (int k = 0; k < 8; k++) begin
      int p;
      p = (starts[k] + PW) / R + 1;          // first packet after pulse k
      check(int_at_pkt[p] - noise_sum[(p + 1) * R] == longint'(k + 1) * area,
            $sformatf("step %0d height", k));
    end
    plateau = int_at_pkt[80000 / R];
    check(plateau - noise_sum[80000 + R] == 8 * area, "plateau holds eight steps");
    check(int_at_pkt[N / R - 1] == noise_sum[N], "field back to zero after the down steps");
    check(status.stream_dropped == 0, "no packet lost");
    check(n_pkt == N / R, $sformatf("%0d packets", n_pkt));
    $display("pulse area %0d LSB*samples, plateau %0d, final %0d", area, plateau, int_at_pkt[N / R - 1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
