// dma_master: writes packet streams into per-source ring buffers in memory.
//
// NSRC packet streams (the slow-path combiner and the fast streamer of each
// I/O module) are arbitrated a whole packet at a time (combiner, round-robin)
// and written as 128-bit words to a memory write port, source s into the
// ring of 2^RING_LOG2 words at word address s * 2^RING_LOG2. wr_ptr[s] is the
// next word to be written in that ring and pkts[s] the packets completed, for
// software to follow. m_addr is a byte address. The write port is a plain
// valid/ready port standing in for the AXI port of the processor's DDR4
// controller; the ring layout is this design's choice.
// Timing: m_addr and m_data are combinational from the granted source, with
// no added latency. The pointer and the packet counter update on each
// accepted word. The per-source rings and their addressing are this
// design's own.
module dma_master #(
  parameter int unsigned NSRC      = 8,
  parameter int unsigned RING_LOG2 = 20
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         s_valid [NSRC],
  output logic         s_ready [NSRC],
  input  logic [127:0] s_data  [NSRC],
  input  logic         s_last  [NSRC],
  output logic         m_valid,
  input  logic         m_ready,
  output logic [31:0]  m_addr,
  output logic [127:0] m_data,
  output logic [31:0]  wr_ptr [NSRC],
  output logic [31:0]  pkts   [NSRC]
);
  localparam int unsigned SW = $clog2(NSRC > 1 ? NSRC : 2);
  logic [SW-1:0] sel;
  logic          c_last;
  combiner #(.N(NSRC), .W(128)) u_arb (
    .clk, .rst, .i_valid(s_valid), .i_ready(s_ready), .i_data(s_data), .i_last(s_last),
    .o_valid(m_valid), .o_ready(m_ready), .o_data(m_data), .o_last(c_last), .o_sel(sel));

  assign m_addr = 32'(((64'(sel) << RING_LOG2) + 64'(wr_ptr[sel])) << 4);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < int'(NSRC); s++) begin
        wr_ptr[s] <= '0; pkts[s] <= '0;
      end
    end else if (m_valid && m_ready) begin
      wr_ptr[sel] <= 32'((64'(wr_ptr[sel]) + 1) & ((64'd1 << RING_LOG2) - 1));
      if (c_last) pkts[sel] <= pkts[sel] + 1'b1;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst) (m_valid && !m_ready) |=> m_valid && $stable(m_addr) && $stable(m_data));
endmodule
