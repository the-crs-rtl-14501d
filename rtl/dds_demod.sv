// dds_demod: per-channel DDS mixer that brings each channel's tone to DC.
//
// Lane LANE carries channels LANE*256 .. LANE*256+255, one per clock. For
// each channel a 32-bit phase accumulator advances by the channel's residual
// frequency (low 32 bits of its 40-bit frequency word: one step per
// 2.44 MSPS channel sample, 0.57 mHz resolution) and the bin sample x is
// multiplied by exp(-j*phase):
//     y = x * (cos - j sin),  Q15 table, rounded, saturated to 24 bits.
// Phase accumulators and frequency words live in per-lane memories and reset
// to zero, so demodulation and synthesis of a channel start phase-aligned.
// The accumulator width and the sine table are this design's choice.
//
// Timing: out is registered, one clock after in; bin, chan and last pass.
module dds_demod
  import crs_pkg::*;
#(
  parameter int unsigned LANE = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [63:0] cfg_wdata,
  input  lane_t       in,
  output lane_t       out
);
  logic [31:0] inc [256];
  logic [31:0] ph  [256];
  logic signed [TRIG_W-1:0] c, s;
  logic signed [63:0] yi, yq;

  sincos_lut #(.PHASE_W(32)) u_lut (.phase(ph[in.chan]), .cos_o(c), .sin_o(s));

  assign yi = 64'(in.i) * 64'(c) + 64'(in.q) * 64'(s) + 64'sd16384;
  assign yq = 64'(in.q) * 64'(c) - 64'(in.i) * 64'(s) + 64'sd16384;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int t = 0; t < 256; t++) begin
        inc[t] <= '0;
        ph[t]  <= '0;
      end
      out <= '0;
    end else begin
      if (in.valid) ph[in.chan] <= ph[in.chan] + inc[in.chan];
      if (cfg_we && cfg_addr[15:12] == R_CH_FREQ && cfg_addr[11:8] == 4'(LANE))
        inc[cfg_addr[7:0]] <= cfg_wdata[31:0];
      out.valid <= in.valid;
      out.last  <= in.last;
      out.chan  <= in.chan;
      out.bin   <= in.bin;
      out.i     <= 32'(sat(yi >>> 15, CH_W));
      out.q     <= 32'(sat(yq >>> 15, CH_W));
    end
  end
endmodule
