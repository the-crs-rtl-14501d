// crs_top: rfmux signal path of one CRS board, default configuration.
//
// NMOD = 4 I/O modules, each one RF chain with 1,024 channels over 625 MHz
// of complex bandwidth (4,096 channels in all). Their slow-path packet
// streams and fast-streamer streams go either to the DMA master, which writes
// them to per-source ring buffers through a memory write port (the DDR4
// controller of the processor), or to the 100G packetizer, whose stream feeds
// a 100 GbE MAC. Source s = m is module m's slow stream, s = NMOD + m its
// fast stream, in both. The processor's control interface is a 64-bit write
// bus: cfg_addr[17:16] selects the module, cfg_addr[15:0] the register (see
// crs_pkg). Time stamps enter on timestamp (IRIG-B decoding is outside).
// Converters, processor, memory and MACs are outside the design; their
// signals are ports.
//
// Timing: clk is the 625 MHz sample clock of the modules; each module takes
// 8 ADC samples and gives 8 DAC samples per clock.
// The module count, the channel count, and the two outputs (DMA to memory,
// 100G packetizer) follow the published block diagram. The address split
// and the source numbering are this design's own.
module crs_top
  import crs_pkg::*;
#(
  parameter int unsigned NMOD = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         cfg_we,
  input  logic [17:0]  cfg_addr,
  input  logic [63:0]  cfg_wdata,
  input  logic [63:0]  timestamp,
  input  logic         adc_valid [NMOD],
  input  logic signed [ADC_W-1:0] adc_data [NMOD][NSUB],
  output logic         dac_valid [NMOD],
  output logic signed [ADC_W-1:0] dac_data [NMOD][NSUB],
  output logic         m_valid,
  input  logic         m_ready,
  output logic [31:0]  m_addr,
  output logic [127:0] m_data,
  output logic [31:0]  dma_wr_ptr [2*NMOD],
  output logic [31:0]  dma_pkts   [2*NMOD],
  output logic         q_valid,
  input  logic         q_ready,
  output logic [127:0] q_data,
  output logic         q_last,
  output logic [31:0]  q_frames,
  output logic         mux_overflow [NMOD],
  output logic         fs_overflow  [NMOD],
  output logic [15:0]  pkt_drops    [NMOD],
  output logic         fb_active    [NMOD],
  output logic [2:0]   cic2_log2r   [NMOD]
);
  localparam int unsigned NS = 2 * NMOD;
  logic         s_valid [NS], s_ready [NS], s_last [NS], s_dest [NS];
  logic [127:0] s_data  [NS];
  logic         d_valid [NS], d_ready [NS], h_valid [NS], h_ready [NS];

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    io_module #(.MOD(m)) u_mod (
      .clk, .rst,
      .cfg_we(cfg_we && cfg_addr[17:16] == 2'(m)), .cfg_addr(cfg_addr[15:0]), .cfg_wdata,
      .timestamp, .adc_valid(adc_valid[m]), .adc_data(adc_data[m]),
      .dac_valid(dac_valid[m]), .dac_data(dac_data[m]),
      .slow_valid(s_valid[m]), .slow_ready(s_ready[m]), .slow_data(s_data[m]), .slow_last(s_last[m]), .slow_dest(s_dest[m]),
      .fast_valid(s_valid[NMOD+m]), .fast_ready(s_ready[NMOD+m]), .fast_data(s_data[NMOD+m]),
      .fast_last(s_last[NMOD+m]), .fast_dest(s_dest[NMOD+m]),
      .mux_overflow(mux_overflow[m]), .fs_overflow(fs_overflow[m]), .pkt_drops(pkt_drops[m]),
      .fb_active(fb_active[m]), .cic2_log2r(cic2_log2r[m]));
  end

  for (genvar s = 0; s < NS; s++) begin : g_route
    assign d_valid[s] = s_valid[s] && !s_dest[s];
    assign h_valid[s] = s_valid[s] &&  s_dest[s];
    assign s_ready[s] = s_dest[s] ? h_ready[s] : d_ready[s];
  end

  dma_master #(.NSRC(NS)) u_dma (.clk, .rst, .s_valid(d_valid), .s_ready(d_ready), .s_data, .s_last,
    .m_valid, .m_ready, .m_addr, .m_data, .wr_ptr(dma_wr_ptr), .pkts(dma_pkts));

  packetizer_100g #(.NSRC(NS)) u_q (.clk, .rst, .s_valid(h_valid), .s_ready(h_ready), .s_data, .s_last,
    .q_valid, .q_ready, .q_data, .q_last, .frames(q_frames));
endmodule
