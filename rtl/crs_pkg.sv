// crs_pkg: types, constants and elaboration-time table generators shared by
// the KID readout signal path.
//
// The signal path channelizes 625 MSPS complex baseband (one sample per clock
// here) into 256 PFB bins at 2.44 MSPS and hands 1,024 channels to four lanes
// of 256 channels each. A lane carries one channel sample per clock, tagged
// with its channel index, its PFB bin and a frame-end flag (lane_t).
//
// Numbers that come from the published architecture: 256 bins, 1,024
// channels per module, 4 modules, 14-bit converters, 16-bit (I,Q) at the DDC,
// 24-bit (I,Q) per channel, CIC1 /64, CIC2 /16,/32,/64 and 32-bit slow output.
// Everything else here (lane count, table sizes, the register map, the Hann
// windowed sinc prototype) is this design's own choice.
//
// Control register map (64-bit write bus, word address addr[15:0]):
//   addr[15:12] region, addr[11:0] channel index or register number.
package crs_pkg;

  // ---- sizes ---------------------------------------------------------------
  localparam int unsigned M_BINS   = 256;   // PFB bins / decimation
  localparam int unsigned NCH_MOD  = 1024;  // channels per I/O module
  localparam int unsigned NLANES   = 4;     // channel lanes per module
  localparam int unsigned CH_W     = 24;    // channel sample width (I and Q)
  localparam int unsigned BB_W     = 16;    // 625 MSPS baseband width
  localparam int unsigned ADC_W    = 14;
  localparam int unsigned NSUB     = 8;     // converter samples per clock
  localparam int unsigned LUT_BITS = 10;    // sine table address bits
  localparam int unsigned TRIG_W   = 16;    // sine table amplitude (Q15)

  // ---- control regions -----------------------------------------------------
  localparam logic [3:0] R_CH_FREQ  = 4'h0; // [39:0] channel frequency word
  localparam logic [3:0] R_CH_AMPPH = 4'h1; // [15:0] amplitude, [31:16] phase
  localparam logic [3:0] R_FB_GAIN  = 4'h2; // [15:0] gain I, [31:16] gain Q
  localparam logic [3:0] R_FB_OFS   = 4'h3; // [23:0] offset I, [55:32] offset Q
  localparam logic [3:0] R_FB_MODE  = 4'h4; // [1:0] fb_mode_e, [2] clear acc
  localparam logic [3:0] R_MUX_SEL  = 4'h5; // [0] stream this channel on fast path
  localparam logic [3:0] R_GLOBAL   = 4'h8; // module registers, see below
  // R_GLOBAL register numbers (addr[11:0])
  localparam logic [11:0] G_DDC_INC  = 12'h000; // [31:0]
  localparam logic [11:0] G_DUC_INC  = 12'h001; // [31:0]
  localparam logic [11:0] G_CIC2_LOG = 12'h002; // [2:0] 4, 5 or 6
  localparam logic [11:0] G_FB_SAT   = 12'h003; // [23:0] saturation limit
  localparam logic [11:0] G_FS_CTRL  = 12'h004; // [1:0] fs_mode_e, [2] dest 100G, [3] continuous, [63:32] length
  localparam logic [11:0] G_FS_ARM   = 12'h005; // any write starts a capture
  localparam logic [11:0] G_SLOW_DST = 12'h006; // [0] slow packets to 100G instead of DMA

  typedef enum logic [1:0] {FB_OFF = 2'd0, FB_IQ = 2'd1, FB_FREQ = 2'd2} fb_mode_e;
  typedef enum logic [1:0] {FS_IDLE = 2'd0, FS_ADC = 2'd1, FS_PFB = 2'd2} fs_mode_e;

  // One channel sample on a lane.
  typedef struct packed {
    logic               valid;
    logic               last;   // last channel of the lane in this frame
    logic [7:0]         chan;   // channel index within the lane
    logic [7:0]         bin;    // PFB bin the channel sits in
    logic signed [31:0] i;      // sign-extended; width in use depends on stage
    logic signed [31:0] q;
  } lane_t;

  localparam logic [15:0] PKT_MAGIC = 16'hC125;
  localparam logic [15:0] FS_MAGIC  = 16'hFA57;
  localparam logic [15:0] Q_MAGIC   = 16'h100C;

  // ---- arithmetic helpers --------------------------------------------------
  function automatic logic signed [63:0] sat(input logic signed [63:0] x, input int unsigned w);
    logic signed [63:0] mx, mn;
    mx = (64'sd1 <<< (w - 1)) - 64'sd1;
    mn = -(64'sd1 <<< (w - 1));
    if (x > mx) return mx;
    if (x < mn) return mn;
    return x;
  endfunction

  // Bit reversal of an n-bit index.
  function automatic logic [15:0] bitrev(input logic [15:0] x, input int unsigned n);
    logic [15:0] r;
    r = '0;
    for (int b = 0; b < 16; b++) if (b < n) r[n - 1 - b] = x[b];
    return r;
  endfunction

  // ---- elaboration-time tables ---------------------------------------------
  localparam real PI = 3.14159265358979323846;

  typedef logic signed [TRIG_W-1:0] trig_tab_t [1 << LUT_BITS];

  // cos or sin (sel=1) of 2*pi*k/2^LUT_BITS in Q15, rounded.
  function automatic trig_tab_t mk_trig(input bit sel);
    trig_tab_t t;
    for (int k = 0; k < (1 << LUT_BITS); k++) begin
      real a;
      a = 2.0 * PI * real'(k) / real'(1 << LUT_BITS);
      t[k] = TRIG_W'($rtoi($floor(32767.0 * (sel ? $sin(a) : $cos(a)) + 0.5)));
    end
    return t;
  endfunction

  // Twiddles exp(-j*2*pi*k/N) for k < N/2, 18-bit Q17 (re, im).
  typedef logic signed [17:0] tw_tab_t [M_BINS/2];
  function automatic tw_tab_t mk_tw(input bit im);
    tw_tab_t t;
    for (int k = 0; k < M_BINS/2; k++) begin
      real a;
      a = -2.0 * PI * real'(k) / real'(M_BINS);
      t[k] = 18'($rtoi($floor(131071.0 * (im ? $sin(a) : $cos(a)) + 0.5)));
    end
    return t;
  endfunction

  // PFB prototype: h[n] = sinc((n - (L-1)/2)/M) * hann(n), L = taps*M,
  // 18-bit Q17 so that the branch sums are close to 1.0.
  function automatic real pfb_h(input int n, input int taps);
    real x, s, w;
    int  l;
    l = taps * M_BINS;
    x = (real'(n) - real'(l - 1) / 2.0) / real'(M_BINS);
    s = (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
    w = 0.5 - 0.5 * $cos(2.0 * PI * (real'(n) + 0.5) / real'(l));
    return s * w;
  endfunction
  function automatic logic signed [17:0] pfb_coef(input int n, input int taps);
    return 18'($rtoi($floor(131071.0 * pfb_h(n, taps) + 0.5)));
  endfunction

endpackage
