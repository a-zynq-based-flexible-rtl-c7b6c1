// circ_buffer: the on-chip memory behind the transient recorder's circular
// buffer.
//
// A simple dual-port RAM of DEPTH words of DW bits: one write port and one
// read port with a registered output, both on clk, so it maps onto FPGA
// block RAM. The circular addressing (wrap-around, pre/post trigger
// windows) lives in record_ctrl; DEPTH must be a power of two so that
// addresses wrap by overflow.
//
// Timing: rdata shows mem[raddr] the cycle after re; it holds its value
// while re is low. A read and a write of the same address in one cycle
// return the old word. DEPTH (8192 words) is this design's choice: it holds
// a 1 ms window at 5 MS/s (5000 samples), the event window the paper's
// beam-source application records.
module circ_buffer #(
  parameter int unsigned DW    = 18,
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  initial begin
    assert (DEPTH == (1 << AW)) else $error("circ_buffer: DEPTH must be a power of two");
  end

endmodule
