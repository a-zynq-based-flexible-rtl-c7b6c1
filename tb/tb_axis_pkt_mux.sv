// tb_axis_pkt_mux: two random AXI-Stream packet sources (A: 3-word packets,
// B: packets of 1 to 40 words) with random gaps, and a random tready on the
// output. Checks that each source's words come out complete and in order
// under its tid, that packets never interleave, that A wins whenever both
// wait at a packet boundary, and that an offered word holds until taken.
module tb_axis_pkt_mux;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] a_tdata, b_tdata, m_tdata;
  logic a_tvalid, a_tlast, a_tready, b_tvalid, b_tlast, b_tready;
  logic m_tvalid, m_tlast, m_tid, m_tready;

  int checks = 0, failures = 0;

  axis_pkt_mux #(.W(32)) dut (
    .clk, .rst_n,
    .a_tdata, .a_tvalid, .a_tlast, .a_tready,
    .b_tdata, .b_tvalid, .b_tlast, .b_tready,
    .m_tdata, .m_tvalid, .m_tlast, .m_tid, .m_tready
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

  // sources: word value = sequence number; packet lengths random
  int a_seq = 0, b_seq = 0, a_left = 0, b_left = 0;
  int a_sent = 0, b_sent = 0;
  bit gen_on = 1;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_tvalid <= 0; b_tvalid <= 0; a_tlast <= 0; b_tlast <= 0;
      a_tdata <= 0; b_tdata <= 0;
    end else begin
      if (a_tvalid && a_tready) begin a_tvalid <= 0; a_sent++; end
      if (b_tvalid && b_tready) begin b_tvalid <= 0; b_sent++; end
      if ((!a_tvalid || a_tready) && (gen_on || a_left != 0) && $urandom_range(0, 3) == 0) begin
        if (a_left == 0) a_left = 3;
        a_tdata  <= 32'(a_seq);
        a_tlast  <= (a_left == 1);
        a_tvalid <= 1;
        a_seq++;
        a_left--;
      end
      if ((!b_tvalid || b_tready) && (gen_on || b_left != 0) && $urandom_range(0, 1) == 0) begin
        if (b_left == 0) b_left = $urandom_range(1, 40);
        b_tdata  <= 32'h8000_0000 | 32'(b_seq);
        b_tlast  <= (b_left == 1);
        b_tvalid <= 1;
        b_seq++;
        b_left--;
      end
    end
  end

  always @(negedge clk) m_tready <= ($urandom_range(0, 2) != 0);

  // sink
  int a_exp = 0, b_exp = 0, a_pkts = 0, b_pkts = 0, prio_events = 0;
  bit in_pkt = 0, cur_tid = 0;
  logic [31:0] held_data; bit held = 0; bit held_tid;
  always @(posedge clk) if (rst_n) begin
    if (held) check(m_tvalid && m_tdata == held_data && m_tid == held_tid, "word held until taken");
    // priority: at a boundary with both sources waiting and no word already
    // offered, A goes first
    if (!in_pkt && !held && a_tvalid && b_tvalid) begin
      check(m_tid == 0, "A wins at a packet boundary");
      prio_events++;
    end
    held = m_tvalid && !m_tready;
    held_data = m_tdata;
    held_tid = m_tid;
    if (m_tvalid && m_tready) begin
      if (in_pkt) check(m_tid == cur_tid, "packets do not interleave");
      if (m_tid == 0) begin
        check(m_tdata == 32'(a_exp), $sformatf("A word %0d got %0d", a_exp, m_tdata));
        check(m_tlast == (a_exp % 3 == 2), "A tlast every 3 words");
        a_exp++;
        if (m_tlast) a_pkts++;
      end else begin
        check(m_tdata == (32'h8000_0000 | 32'(b_exp)), $sformatf("B word %0d got %h", b_exp, m_tdata));
        b_exp++;
        if (m_tlast) b_pkts++;
      end
      in_pkt  = !m_tlast;
      cur_tid = m_tid;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (20000) @(posedge clk);
    gen_on = 0;
    repeat (200) @(posedge clk);
    check(a_exp == a_seq && b_exp == b_seq, "every word delivered");
    check(a_pkts > 100 && b_pkts > 100, $sformatf("packets A %0d B %0d", a_pkts, b_pkts));
    check(prio_events > 10, $sformatf("%0d priority decisions seen", prio_events));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
