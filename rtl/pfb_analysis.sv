// pfb_analysis: critically sampled polyphase analysis filter bank (PFB /256).
//
// The 625 MSPS complex stream is split into frames of M = 256 samples. For
// sample p of frame m the polyphase FIR forms
//     u_m[p] = sum_{t=0}^{TAPS-1} h[t*M + p] * x[(m - TAPS + 1 + t)*M + p]
// (branch filters h1(z)..hN(z) of the published block diagram), and a
// 256-point FFT of u_m gives bin k = sum_p u_m[p] exp(-j 2 pi k p / M):
// 256 bins, each a 2.44 MSPS complex stream. The prototype filter h is a
// Hann-windowed sinc of TAPS*M taps (Q17, computed at elaboration, see
// crs_pkg::pfb_coef); the tap count and window are this design's choice.
//
// Interface: one 16-bit complex sample per clock with i_valid; frames align
// to the first valid sample after reset. Output: one bin per valid clock in
// FFT (bit-reversed) order, o_bin giving the true bin index and o_last the
// last bin of a frame. A bin-centred full-scale tone gives 2^23 (24-bit out).
// Latency: 1 + 263 valid clocks (FIR register + R2SDF pipeline).
module pfb_analysis
  import crs_pkg::*;
#(
  parameter int unsigned TAPS = 4,
  parameter int unsigned W    = 24
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    i_valid,
  input  logic signed [BB_W-1:0]  i_i,
  input  logic signed [BB_W-1:0]  i_q,
  output logic                    o_valid,
  output logic [7:0]              o_bin,
  output logic                    o_last,
  output logic signed [W-1:0]     o_i,
  output logic signed [W-1:0]     o_q
);
  localparam int unsigned M = M_BINS;
  typedef logic signed [17:0] coef_t [TAPS*M];
  function automatic coef_t mk_coef();
    coef_t c;
    for (int n = 0; n < int'(TAPS*M); n++) c[n] = pfb_coef(n, TAPS);
    return c;
  endfunction
  localparam coef_t H = mk_coef();

  logic [7:0] p;
  logic signed [BB_W-1:0] hi [TAPS-1][M];   // hi[0] oldest frame
  logic signed [BB_W-1:0] hq [TAPS-1][M];
  logic signed [63:0] acc_i, acc_q;
  logic signed [W-1:0] u_i, u_q;
  logic u_v;
  logic [7:0] pos;

  always_comb begin
    acc_i = 64'(H[(TAPS-1)*M + p]) * 64'(i_i);
    acc_q = 64'(H[(TAPS-1)*M + p]) * 64'(i_q);
    for (int t = 0; t < int'(TAPS) - 1; t++) begin
      acc_i += 64'(H[t*M + p]) * 64'(hi[t][p]);
      acc_q += 64'(H[t*M + p]) * 64'(hq[t][p]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      p   <= '0;
      u_v <= 1'b0;
    end else begin
      u_v <= i_valid;
      if (i_valid) p <= p + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (i_valid) begin
      for (int t = 0; t < int'(TAPS) - 2; t++) begin
        hi[t][p] <= hi[t+1][p];
        hq[t][p] <= hq[t+1][p];
      end
      hi[TAPS-2][p] <= i_i;
      hq[TAPS-2][p] <= i_q;
      u_i <= W'(sat((acc_i + 64'sd65536) >>> 17, W));
      u_q <= W'(sat((acc_q + 64'sd65536) >>> 17, W));
    end
  end

  fft_sdf #(.LOG2N(8), .W(W), .INVERSE(1'b0)) u_fft (
    .clk, .rst, .en(u_v), .i_re(u_i), .i_im(u_q),
    .o_valid, .o_pos(pos), .o_re(o_i), .o_im(o_q)
  );
  assign o_bin  = 8'(bitrev(16'(pos), 8));
  assign o_last = (pos == 8'hFF);
endmodule
