// feedback_ctrl: per-channel integrating feedback controller.
//
// For every demodulated channel sample x (complex) the controller computes
//     acc  <- acc + (gain * x) >>> 15        (complex gain, Q15)
//     fb    = clamp(acc, +-sat_lim) + offset  (complex offset)
// as in the published feedback path: gain, integrator (acc), saturation and
// offset. The accumulator adds with saturation at 32 bits so it never wraps.
// fb drives the synthesis DDS of the same channel according to the channel's
// mode (fb_mode_e): FB_OFF holds the accumulator and the tone is left alone,
// FB_IQ adds fb to the tone's complex amplitude, FB_FREQ adds fb.i to its
// frequency. The modes are this design's reading of "amplitude, phase, and
// frequency ... modulated according to linear combinations of I and Q".
//
// Interface: per-lane channel stream in; out is the same sample delayed one
// clock (to the CIC chain and the fast-stream mux); fb carries the controller
// output for that channel in the same clock, fb_mode its mode. Control
// writes: R_FB_GAIN, R_FB_OFS, R_FB_MODE (bit 2 clears the accumulator),
// G_FB_SAT (module-wide limit, reset 2^23-1).
module feedback_ctrl
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
  output lane_t       out,
  output lane_t       fb,
  output fb_mode_e    fb_mode
);
  logic signed [15:0] gi [256], gq [256];
  logic signed [23:0] oi [256], oq [256];
  fb_mode_e           md [256];
  logic signed [31:0] ai [256], aq [256];
  logic signed [23:0] sat_lim;
  logic signed [63:0] ei, eq, ni, nq, ci, cq;
  logic [7:0] t;
  logic lane_hit;

  assign t  = in.chan;
  assign ei = (64'(gi[t]) * 64'(in.i) - 64'(gq[t]) * 64'(in.q)) >>> 15;
  assign eq = (64'(gi[t]) * 64'(in.q) + 64'(gq[t]) * 64'(in.i)) >>> 15;
  assign ni = (md[t] == FB_OFF) ? 64'(ai[t]) : sat(64'(ai[t]) + ei, 32);
  assign nq = (md[t] == FB_OFF) ? 64'(aq[t]) : sat(64'(aq[t]) + eq, 32);
  assign ci = (ni > 64'(sat_lim)) ? 64'(sat_lim) : (ni < -64'(sat_lim)) ? -64'(sat_lim) : ni;
  assign cq = (nq > 64'(sat_lim)) ? 64'(sat_lim) : (nq < -64'(sat_lim)) ? -64'(sat_lim) : nq;
  assign lane_hit = cfg_we && cfg_addr[11:8] == 4'(LANE);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < 256; k++) begin
        gi[k] <= '0; gq[k] <= '0; oi[k] <= '0; oq[k] <= '0;
        md[k] <= FB_OFF; ai[k] <= '0; aq[k] <= '0;
      end
      sat_lim <= 24'sh7FFFFF;
      out     <= '0;
      fb      <= '0;
      fb_mode <= FB_OFF;
    end else begin
      if (in.valid) begin
        ai[t] <= 32'(ni);
        aq[t] <= 32'(nq);
      end
      if (lane_hit && cfg_addr[15:12] == R_FB_GAIN) begin
        gi[cfg_addr[7:0]] <= cfg_wdata[15:0];
        gq[cfg_addr[7:0]] <= cfg_wdata[31:16];
      end
      if (lane_hit && cfg_addr[15:12] == R_FB_OFS) begin
        oi[cfg_addr[7:0]] <= cfg_wdata[23:0];
        oq[cfg_addr[7:0]] <= cfg_wdata[55:32];
      end
      if (lane_hit && cfg_addr[15:12] == R_FB_MODE) begin
        md[cfg_addr[7:0]] <= fb_mode_e'(cfg_wdata[1:0]);
        if (cfg_wdata[2]) begin
          ai[cfg_addr[7:0]] <= '0;
          aq[cfg_addr[7:0]] <= '0;
        end
      end
      if (cfg_we && cfg_addr[15:12] == R_GLOBAL && cfg_addr[11:0] == G_FB_SAT)
        sat_lim <= cfg_wdata[23:0];
      out      <= in;
      fb.valid <= in.valid;
      fb.last  <= in.last;
      fb.chan  <= in.chan;
      fb.bin   <= in.bin;
      fb.i     <= 32'(sat(ci + 64'(oi[t]), CH_W));
      fb.q     <= 32'(sat(cq + 64'(oq[t]), CH_W));
      fb_mode  <= md[t];
    end
  end
endmodule
