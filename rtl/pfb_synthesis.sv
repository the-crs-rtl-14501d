// pfb_synthesis: critically sampled polyphase synthesis filter bank (PFB x256).
//
// One frame of 256 bins (natural order, one per clock) is inverse-FFT'd
// (unnormalized: v_m[p] = sum_k X_k exp(+j 2 pi k p / M)), the bit-reversed
// IFFT output is put back in order through a ping-pong buffer, and the
// polyphase FIR forms the 625 MSPS output
//     y[m*M + p] = sum_{t=0}^{TAPS-1} h[t*M + p] * v_{m-t}[p]
// with the same Hann-windowed sinc prototype as the analysis bank. A bin of
// constant value A gives a tone of amplitude A at that bin's centre; the
// result is shifted right by OUT_SHIFT and saturated to 16 bits, so a single
// full-scale 24-bit bin gives a full-scale 16-bit tone. Tap count, shift and
// the reorder buffer are this design's choice.
//
// Timing: the IFFT advances with i_valid (frames align to the first valid
// bin after reset); the reorder buffer starts reading a frame one clock after
// its last IFFT output and the FIR output follows one clock later, one
// sample per clock for 256 clocks.
module pfb_synthesis
  import crs_pkg::*;
#(
  parameter int unsigned TAPS      = 4,
  parameter int unsigned W         = 24,
  parameter int unsigned OUT_SHIFT = 8
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   i_valid,
  input  logic signed [W-1:0]    i_i,
  input  logic signed [W-1:0]    i_q,
  output logic                   o_valid,
  output logic signed [BB_W-1:0] o_i,
  output logic signed [BB_W-1:0] o_q
);
  localparam int unsigned M = M_BINS;
  typedef logic signed [17:0] coef_t [TAPS*M];
  function automatic coef_t mk_coef();
    coef_t c;
    for (int n = 0; n < int'(TAPS*M); n++) c[n] = pfb_coef(n, TAPS);
    return c;
  endfunction
  localparam coef_t H = mk_coef();

  logic f_v;
  logic [7:0] f_pos;
  logic signed [W-1:0] f_i, f_q;
  fft_sdf #(.LOG2N(8), .W(W), .INVERSE(1'b1)) u_ifft (
    .clk, .rst, .en(i_valid), .i_re(i_i), .i_im(i_q),
    .o_valid(f_v), .o_pos(f_pos), .o_re(f_i), .o_im(f_q)
  );

  // bit-reverse reorder
  logic signed [W-1:0] ri [2][M], rq [2][M];
  logic wsel, rd_act;
  logic [7:0] p;
  always_ff @(posedge clk) begin
    if (f_v) begin
      ri[wsel][8'(bitrev(16'(f_pos), 8))] <= f_i;
      rq[wsel][8'(bitrev(16'(f_pos), 8))] <= f_q;
    end
  end

  // polyphase FIR over frames
  logic signed [W-1:0] hi [TAPS-1][M], hq [TAPS-1][M];   // hi[0] = previous frame
  logic signed [W-1:0] vi, vq;
  logic signed [63:0] acc_i, acc_q;
  assign vi = ri[~wsel][p];
  assign vq = rq[~wsel][p];
  always_comb begin
    acc_i = 64'(H[p]) * 64'(vi);
    acc_q = 64'(H[p]) * 64'(vq);
    for (int t = 1; t < int'(TAPS); t++) begin
      acc_i += 64'(H[t*M + p]) * 64'(hi[t-1][p]);
      acc_q += 64'(H[t*M + p]) * 64'(hq[t-1][p]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wsel <= 1'b0; rd_act <= 1'b0; p <= '0;
      o_valid <= 1'b0; o_i <= '0; o_q <= '0;
      for (int t = 0; t < int'(TAPS) - 1; t++)
        for (int k = 0; k < int'(M); k++) begin
          hi[t][k] <= '0; hq[t][k] <= '0;
        end
    end else begin
      if (f_v && f_pos == 8'hFF) begin
        wsel <= ~wsel; rd_act <= 1'b1; p <= '0;
      end else if (rd_act) begin
        p <= p + 1'b1;
        if (p == 8'hFF) rd_act <= 1'b0;
      end
      o_valid <= rd_act;
      if (rd_act) begin
        o_i <= BB_W'(sat((acc_i + (64'sd1 <<< (16 + OUT_SHIFT))) >>> (17 + OUT_SHIFT), BB_W));
        o_q <= BB_W'(sat((acc_q + (64'sd1 <<< (16 + OUT_SHIFT))) >>> (17 + OUT_SHIFT), BB_W));
        for (int t = int'(TAPS) - 2; t > 0; t--) begin
          hi[t][p] <= hi[t-1][p];
          hq[t][p] <= hq[t-1][p];
        end
        hi[0][p] <= vi;
        hq[0][p] <= vq;
      end
    end
  end
endmodule
