// dds_synth: per-channel DDS that synthesizes each channel's tone.
//
// Each channel has a frequency (low 32 bits of its 40-bit frequency word,
// the residual inside its PFB bin), an amplitude A and a phase theta
// (control region R_CH_AMPPH). Per channel sample the 32-bit phase
// accumulator phi advances by the frequency, and the channel's complex
// sample is
//     s = c * exp(j (phi + theta)),  c = A + fb (FB_IQ) or A (otherwise)
// with the frequency step raised by fb.i <<< FM_SHIFT in FB_FREQ mode. s goes
// to the channel-to-bin corner turn with the channel's bin. Amplitude is a
// signed 16-bit value on the 24-bit channel scale; theta is the top 16 bits
// of a 32-bit phase. Accumulators reset to zero (phase-aligned with the
// demodulating DDS). Encodings and FM_SHIFT are this design's choice.
//
// Timing: out is registered, one clock after fb.
module dds_synth
  import crs_pkg::*;
#(
  parameter int unsigned LANE     = 0,
  parameter int unsigned FM_SHIFT = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [63:0] cfg_wdata,
  input  lane_t       fb,
  input  fb_mode_e    fb_mode,
  output lane_t       out
);
  logic [31:0] inc [256];
  logic [31:0] ph  [256];
  logic signed [15:0] amp [256];
  logic [15:0] th [256];
  logic [7:0]  t;
  logic [31:0] step, ang;
  logic signed [63:0] ci, cq, si, sq;
  logic signed [TRIG_W-1:0] c, s;

  assign t    = fb.chan;
  assign step = (fb_mode == FB_FREQ) ? inc[t] + 32'(fb.i <<< FM_SHIFT) : inc[t];
  assign ang  = ph[t] + {th[t], 16'h0000};
  assign ci   = 64'(amp[t]) + ((fb_mode == FB_IQ) ? 64'(fb.i) : 64'sd0);
  assign cq   = (fb_mode == FB_IQ) ? 64'(fb.q) : 64'sd0;

  sincos_lut #(.PHASE_W(32)) u_lut (.phase(ang), .cos_o(c), .sin_o(s));

  assign si = ci * 64'(c) - cq * 64'(s) + 64'sd16384;
  assign sq = ci * 64'(s) + cq * 64'(c) + 64'sd16384;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < 256; k++) begin
        inc[k] <= '0; ph[k] <= '0; amp[k] <= '0; th[k] <= '0;
      end
      out <= '0;
    end else begin
      if (fb.valid) ph[t] <= ph[t] + step;
      if (cfg_we && cfg_addr[11:8] == 4'(LANE)) begin
        if (cfg_addr[15:12] == R_CH_FREQ) inc[cfg_addr[7:0]] <= cfg_wdata[31:0];
        if (cfg_addr[15:12] == R_CH_AMPPH) begin
          amp[cfg_addr[7:0]] <= cfg_wdata[15:0];
          th[cfg_addr[7:0]]  <= cfg_wdata[31:16];
        end
      end
      out.valid <= fb.valid;
      out.last  <= fb.last;
      out.chan  <= fb.chan;
      out.bin   <= fb.bin;
      out.i     <= 32'(sat(si >>> 15, CH_W));
      out.q     <= 32'(sat(sq >>> 15, CH_W));
    end
  end
endmodule
