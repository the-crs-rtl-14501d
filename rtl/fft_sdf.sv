// fft_sdf: streaming radix-2 single-path delay-feedback (R2SDF) FFT.
//
// Takes one complex sample per enabled clock in natural order, frames of
// N = 2^LOG2N samples aligned to the first enabled clock after reset, and
// gives one output per enabled clock in bit-reversed order. Stage s holds a
// delay line of N/2^(s+1) samples: in the first half of its span it stores
// the incoming sample and releases the stored difference; in the second half
// it releases a+b and stores (a-b)*W. No scaling: each stage may grow one
// bit, so the caller leaves LOG2N bits of headroom; additions saturate.
// INVERSE=1 uses conjugate twiddles (unnormalized inverse DFT).
//
// Timing: everything advances only when en=1. The output for position p of
// a frame is produced LAT = N-1+LOG2N enabled clocks after input sample p of
// that frame; o_pos is p, o_valid marks outputs of completed frames.
// Architecture and widths are this design's choice; the published
// architecture gives only the FFT size (256).
module fft_sdf
  import crs_pkg::*;
#(
  parameter int unsigned LOG2N   = 8,
  parameter int unsigned W       = 24,
  parameter bit          INVERSE = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic signed [W-1:0]  i_re,
  input  logic signed [W-1:0]  i_im,
  output logic                 o_valid,
  output logic [LOG2N-1:0]     o_pos,
  output logic signed [W-1:0]  o_re,
  output logic signed [W-1:0]  o_im
);
  localparam int unsigned N   = 1 << LOG2N;
  localparam int unsigned LAT = N - 1 + LOG2N;
  localparam tw_tab_t TW_RE = mk_tw(1'b0);
  localparam tw_tab_t TW_IM = mk_tw(1'b1);

  logic [LOG2N-1:0] n;          // enabled-sample counter, mod N
  logic [15:0]      filled;     // saturating count up to LAT
  logic signed [W-1:0] sre [LOG2N+1];
  logic signed [W-1:0] sim [LOG2N+1];

  assign sre[0] = i_re;
  assign sim[0] = i_im;

  always_ff @(posedge clk) begin
    if (rst) begin
      n <= '0;
      filled <= '0;
      o_valid <= 1'b0;
      o_pos <= '0;
    end else begin
      o_valid <= en && (filled >= 16'(LAT - 1));
      if (en) begin
        n <= n + 1'b1;
        if (filled < 16'(LAT)) filled <= filled + 1'b1;
        o_pos <= LOG2N'(n - LOG2N'(LAT - 1));
      end
    end
  end

  for (genvar s = 0; s < LOG2N; s++) begin : g_st
    localparam int unsigned L   = N >> s;
    localparam int unsigned D   = L / 2;
    localparam int unsigned OFS = (N - (N >> s)) + s;   // sum of (D_j + 1), j < s
    logic [LOG2N-1:0] c;
    logic [LOG2N-1:0] k;
    logic signed [W-1:0] f_re [D];
    logic signed [W-1:0] f_im [D];
    logic signed [W-1:0] a_re, a_im, nx_re, nx_im, y_re, y_im;
    logic signed [W:0]   d_re, d_im;
    logic signed [17:0]  w_re, w_im;
    logic signed [W+18:0] m_re, m_im;
    localparam int unsigned PW = (D > 1) ? $clog2(D) : 1;
    logic [PW-1:0] ptr;

    assign c   = LOG2N'(n - LOG2N'(OFS)) & LOG2N'(L - 1);
    assign ptr = (D > 1) ? PW'(c) : '0;
    assign a_re = f_re[ptr];
    assign a_im = f_im[ptr];
    assign k    = LOG2N'((c - LOG2N'(D)) << s);
    assign w_re = TW_RE[k[LOG2N-2:0]];
    assign w_im = INVERSE ? -TW_IM[k[LOG2N-2:0]] : TW_IM[k[LOG2N-2:0]];
    assign d_re = (W+1)'(a_re) - (W+1)'(sre[s]);
    assign d_im = (W+1)'(a_im) - (W+1)'(sim[s]);
    // (a - b) * W, Q17 twiddle, rounded
    assign m_re = (W+19)'(d_re) * (W+19)'(w_re) - (W+19)'(d_im) * (W+19)'(w_im) + (W+19)'(1 <<< 16);
    assign m_im = (W+19)'(d_re) * (W+19)'(w_im) + (W+19)'(d_im) * (W+19)'(w_re) + (W+19)'(1 <<< 16);

    always_comb begin
      if (c < LOG2N'(D)) begin
        y_re  = a_re;
        y_im  = a_im;
        nx_re = sre[s];
        nx_im = sim[s];
      end else begin
        y_re  = W'(sat(64'(a_re) + 64'(sre[s]), W));
        y_im  = W'(sat(64'(a_im) + 64'(sim[s]), W));
        nx_re = W'(sat(64'(m_re >>> 17), W));
        nx_im = W'(sat(64'(m_im >>> 17), W));
      end
    end

    always_ff @(posedge clk) begin
      if (en) begin
        f_re[ptr] <= nx_re;
        f_im[ptr] <= nx_im;
        sre[s+1] <= y_re;
        sim[s+1] <= y_im;
      end
    end
  end

  assign o_re = sre[LOG2N];
  assign o_im = sim[LOG2N];
endmodule
