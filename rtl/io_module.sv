// io_module: one I/O module, a complete RF chain of the KID readout.
//
// Receive: RF-ADC samples -> adc_ddc (NCO, /8, 625 MSPS complex) ->
// pfb_analysis (256 bins at 2.44 MSPS) -> corner_turn_b2c (1,024 channels on
// LANES = 4 lanes of 256) -> per lane dds_demod (tone to DC) ->
// feedback_ctrl. Slow path per lane: cic_decimator /64 (CIC1, 38 kSPS) ->
// cic_decimator /2^N (CIC2, N = 4..6) -> packetizer, lanes merged by the
// combiner. Fast path: channel_mux (selected channels) and the DDC output go
// to fast_streamer. Transmit: feedback_ctrl output -> per lane dds_synth ->
// corner_turn_c2b -> pfb_synthesis -> dac_duc -> RF-DAC samples. This
// follows the published signal-path block diagram; the lane count and the
// module registers below are this design's choice.
//
// Module registers (R_GLOBAL): G_DDC_INC, G_DUC_INC (NCO steps per 5 GSPS
// sample), G_CIC2_LOG (4, 5 or 6; reset 4), G_FB_SAT, G_FS_CTRL/G_FS_ARM,
// G_SLOW_DST. The slow and fast packet streams leave with a destination bit
// (0 = DMA master, 1 = 100G packetizer).
//
// Timing: one 625 MSPS complex sample per clock, so the clock stands for
// 625 MHz; ADC to DAC latency is about 3 frames (768 clocks) plus the filter
// delays. The design needs adc_valid continuously high in operation.
module io_module
  import crs_pkg::*;
#(
  parameter int unsigned MOD   = 0,
  parameter int unsigned LANES = NLANES
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         cfg_we,
  input  logic [15:0]  cfg_addr,
  input  logic [63:0]  cfg_wdata,
  input  logic [63:0]  timestamp,
  input  logic         adc_valid,
  input  logic signed [ADC_W-1:0] adc_data [NSUB],
  output logic         dac_valid,
  output logic signed [ADC_W-1:0] dac_data [NSUB],
  output logic         slow_valid,
  input  logic         slow_ready,
  output logic [127:0] slow_data,
  output logic         slow_last,
  output logic         slow_dest,
  output logic         fast_valid,
  input  logic         fast_ready,
  output logic [127:0] fast_data,
  output logic         fast_last,
  output logic         fast_dest,
  output logic         mux_overflow,
  output logic         fs_overflow,
  output logic [15:0]  pkt_drops,
  output logic         fb_active,
  output logic [2:0]   cic2_log2r
);
  logic [31:0] ddc_inc, duc_inc;
  always_ff @(posedge clk) begin
    if (rst) begin
      ddc_inc <= '0; duc_inc <= '0; cic2_log2r <= 3'd4; slow_dest <= 1'b0;
    end else if (cfg_we && cfg_addr[15:12] == R_GLOBAL) begin
      case (cfg_addr[11:0])
        G_DDC_INC:  ddc_inc <= cfg_wdata[31:0];
        G_DUC_INC:  duc_inc <= cfg_wdata[31:0];
        G_CIC2_LOG: if (cfg_wdata[2:0] >= 3'd4 && cfg_wdata[2:0] <= 3'd6) cic2_log2r <= cfg_wdata[2:0];
        G_SLOW_DST: slow_dest <= cfg_wdata[0];
        default: ;
      endcase
    end
  end

  // ---- receive ----
  logic bb_v;
  logic signed [BB_W-1:0] bb_i, bb_q;
  adc_ddc u_ddc (.clk, .rst, .adc_valid, .adc_data, .nco_inc(ddc_inc), .o_valid(bb_v), .o_i(bb_i), .o_q(bb_q));

  logic pf_v, pf_last;
  logic [7:0] pf_bin;
  logic signed [CH_W-1:0] pf_i, pf_q;
  pfb_analysis u_pfb_a (.clk, .rst, .i_valid(bb_v), .i_i(bb_i), .i_q(bb_q),
    .o_valid(pf_v), .o_bin(pf_bin), .o_last(pf_last), .o_i(pf_i), .o_q(pf_q));

  lane_t ch [LANES], dm [LANES], fo [LANES], fbk [LANES], sy [LANES], c1 [LANES], c2 [LANES];
  fb_mode_e fmode [LANES];
  corner_turn_b2c #(.LANES(LANES)) u_b2c (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata,
    .i_valid(pf_v), .i_bin(pf_bin), .i_last(pf_last), .i_i(pf_i), .i_q(pf_q), .out(ch));

  logic         p_valid [LANES], p_ready [LANES], p_last [LANES];
  logic [127:0] p_data  [LANES];
  logic [15:0]  drops   [LANES];
  logic [31:0]  seq     [LANES];
  logic [LANES-1:0] fb_on;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    dds_demod #(.LANE(l)) u_dm (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata, .in(ch[l]), .out(dm[l]));
    feedback_ctrl #(.LANE(l)) u_fb (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata, .in(dm[l]),
      .out(fo[l]), .fb(fbk[l]), .fb_mode(fmode[l]));
    dds_synth #(.LANE(l)) u_sy (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata, .fb(fbk[l]), .fb_mode(fmode[l]), .out(sy[l]));
    cic_decimator #(.OUT_W(24)) u_cic1 (.clk, .rst, .log2r(3'd6), .in(fo[l]), .out(c1[l]));
    cic_decimator #(.OUT_W(32)) u_cic2 (.clk, .rst, .log2r(cic2_log2r), .in(c1[l]), .out(c2[l]));
    packetizer #(.MOD(MOD), .LANE(l)) u_pk (.clk, .rst, .in(c2[l]), .timestamp,
      .o_valid(p_valid[l]), .o_ready(p_ready[l]), .o_data(p_data[l]), .o_last(p_last[l]),
      .seq(seq[l]), .drops(drops[l]));
    assign fb_on[l] = fbk[l].valid && fmode[l] != FB_OFF;
  end

  always_comb begin
    pkt_drops = '0;
    for (int l = 0; l < int'(LANES); l++) pkt_drops += drops[l];
  end
  assign fb_active = |fb_on;

  logic [$clog2(LANES > 1 ? LANES : 2)-1:0] csel;
  combiner #(.N(LANES), .W(128)) u_comb (.clk, .rst, .i_valid(p_valid), .i_ready(p_ready),
    .i_data(p_data), .i_last(p_last), .o_valid(slow_valid), .o_ready(slow_ready),
    .o_data(slow_data), .o_last(slow_last), .o_sel(csel));

  logic mx_v;
  logic [9:0] mx_ch;
  logic signed [CH_W-1:0] mx_i, mx_q;
  channel_mux #(.LANES(LANES)) u_mux (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata, .in(fo),
    .o_valid(mx_v), .o_chan(mx_ch), .o_i(mx_i), .o_q(mx_q), .overflow(mux_overflow));

  logic fs_act;
  fast_streamer #(.MOD(MOD)) u_fs (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata,
    .adc_valid(bb_v), .adc_i(bb_i), .adc_q(bb_q), .ch_valid(mx_v), .ch_chan(mx_ch), .ch_i(mx_i), .ch_q(mx_q),
    .o_valid(fast_valid), .o_ready(fast_ready), .o_data(fast_data), .o_last(fast_last), .o_dest(fast_dest),
    .overflow(fs_overflow), .active(fs_act));

  // ---- transmit ----
  logic cb_v, cb_last;
  logic [7:0] cb_bin;
  logic signed [CH_W-1:0] cb_i, cb_q;
  corner_turn_c2b #(.LANES(LANES)) u_c2b (.clk, .rst, .in(sy), .o_valid(cb_v), .o_bin(cb_bin),
    .o_last(cb_last), .o_i(cb_i), .o_q(cb_q));

  logic sb_v;
  logic signed [BB_W-1:0] sb_i, sb_q;
  pfb_synthesis u_pfb_s (.clk, .rst, .i_valid(cb_v), .i_i(cb_i), .i_q(cb_q), .o_valid(sb_v), .o_i(sb_i), .o_q(sb_q));
  dac_duc u_duc (.clk, .rst, .i_valid(sb_v), .i_i(sb_i), .i_q(sb_q), .nco_inc(duc_inc), .dac_valid, .dac_data);
endmodule
