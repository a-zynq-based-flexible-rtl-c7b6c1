// tb_circ_buffer: writes the whole memory with random words, reads it back
// in random order checking the one-cycle read latency, that rdata holds
// while re is low, and read-during-write of the same address.
module tb_circ_buffer;

  localparam int DW = 18, DEPTH = 8192, AW = 13;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  circ_buffer dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

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
    logic [DW-1:0] held;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = DW'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < 20000; i++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      @(negedge clk); re = 1'b1; raddr = AW'(a);
      @(negedge clk); re = 1'b0;
      check(rdata == model[a], $sformatf("addr %0d: %h expected %h", a, rdata, model[a]));
      held = rdata;
      raddr = AW'(a + 1);
      @(negedge clk);
      check(rdata == held, "rdata holds while re is low");
    end
    // read and write of one address in one cycle return the old word
    @(negedge clk);
    re = 1'b1; raddr = 13'd77; we = 1'b1; waddr = 13'd77; wdata = ~model[77];
    @(negedge clk);
    re = 1'b0; we = 1'b0;
    check(rdata == model[77], "read-during-write gives the old word");
    model[77] = ~model[77];
    @(negedge clk); re = 1'b1;
    @(negedge clk); re = 1'b0;
    check(rdata == model[77], "new word after the write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
