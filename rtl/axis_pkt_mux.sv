// axis_pkt_mux: merges two AXI-Stream sources onto one port, a whole packet
// at a time.
//
// When the output is free, source A is chosen if it has a word, otherwise
// source B. The chosen source keeps the port until its word with tlast has
// been accepted, so packets are never interleaved. The output carries
// tid = 0 for A and tid = 1 for B so the receiver can tell them apart.
// Source A has priority at every packet boundary: in the channel it carries
// the short, latency-critical stream packets, and B the long recorded
// windows.
//
// Timing: combinational from the chosen source to the output (no added
// latency); the choice is registered when a packet starts and released
// with the tlast handshake. Standard AXI-Stream rules apply on all ports.
// This block, the priority rule and the tid marking are this design's; the
// description it follows only says a window may reach the processor through
// the FIFO instead of the DMA engine.
module axis_pkt_mux #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  // source A (priority)
  input  logic [W-1:0] a_tdata,
  input  logic         a_tvalid,
  input  logic         a_tlast,
  output logic         a_tready,
  // source B
  input  logic [W-1:0] b_tdata,
  input  logic         b_tvalid,
  input  logic         b_tlast,
  output logic         b_tready,
  // merged output
  output logic [W-1:0] m_tdata,
  output logic         m_tvalid,
  output logic         m_tlast,
  output logic         m_tid,
  input  logic         m_tready
);

  logic locked;       // a packet is in progress
  logic owner;        // 0: A, 1: B (valid while locked)
  logic sel;          // source on the port this cycle

  always_comb begin
    if (locked) sel = owner;
    else        sel = !a_tvalid && b_tvalid;
    m_tdata  = sel ? b_tdata  : a_tdata;
    m_tvalid = sel ? b_tvalid : a_tvalid;
    m_tlast  = sel ? b_tlast  : a_tlast;
    m_tid    = sel;
    a_tready = !sel && m_tready;
    b_tready =  sel && m_tready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      owner  <= 1'b0;
    end else if (m_tvalid && m_tready) begin
      locked <= !m_tlast;
      owner  <= sel;
    end else if (!locked && m_tvalid) begin
      locked <= 1'b1;          // word offered but not taken: hold the choice
      owner  <= sel;
    end
  end

  // Packets are not interleaved: while B's packet is open, A is not served.
  a_no_interleave: assert property (@(posedge clk) disable iff (!rst_n)
    locked && owner |-> !a_tready);
  // AXI-Stream: an offered word stays until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata) && $stable(m_tid));

endmodule
