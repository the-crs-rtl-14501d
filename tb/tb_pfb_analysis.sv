// tb_pfb_analysis: drives the analysis PFB with a two-tone complex signal and
// compares every bin of frame 6 with a floating-point model of the same
// polyphase FIR + DFT (computed here from the filter formula), and checks
// the latency from the last input sample of the frame to its last bin.
// The 256-bin size follows the published design; the model repeats this
// design's own prototype filter and scaling.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_pfb_analysis;
  import crs_pkg::*;
  localparam int M = 256, TAPS = 4, NFR = 9;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic i_valid;
  logic signed [15:0] i_i, i_q;
  logic o_valid, o_last;
  logic [7:0] o_bin;
  logic signed [23:0] o_i, o_q;
  int checks = 0, failures = 0;
  real xr [NFR*M], xi [NFR*M];
  int  got_i [M], got_q [M];
  int  nrx = 0;
  int  frame_out = 0, in_cnt = 0, last_in_cyc = 0, last_out_cyc = 0, cyc = 0;

  pfb_analysis #(.TAPS(TAPS)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real h(int n);
    real x, s, w;
    x = (real'(n) - (TAPS*M - 1) / 2.0) / M;
    s = (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
    w = 0.5 - 0.5 * $cos(2.0 * PI * (n + 0.5) / (TAPS*M));
    return s * w;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (o_valid) begin
    if (frame_out == 6) begin
      got_i[o_bin] = o_i; got_q[o_bin] = o_q; nrx++;
      if (o_last) last_out_cyc = cyc;
    end
    if (o_last) frame_out++;
  end

  initial begin
    i_valid = 0; i_i = 0; i_q = 0;
    for (int n = 0; n < NFR*M; n++) begin
      real a1, a2;
      a1 = 2.0 * PI * (37.0 + 0.2) * n / M;
      a2 = 2.0 * PI * (-100.0 - 0.4) * n / M;
      xr[n] = $rtoi(9000.0 * $cos(a1) + 5000.0 * $cos(a2));
      xi[n] = $rtoi(9000.0 * $sin(a1) + 5000.0 * $sin(a2));
    end
    repeat (4) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NFR*M; n++) begin
      @(posedge clk);
      i_valid <= 1; i_i <= 16'($rtoi(xr[n])); i_q <= 16'($rtoi(xi[n]));
      if (n == 7*M - 1) last_in_cyc = cyc;
    end
    @(posedge clk); i_valid <= 0;
    repeat (50) @(posedge clk);
    // frame 6 of the output = frame m = 6 of the input
    for (int k = 0; k < M; k++) begin
      real er, ei, ur, ui;
      er = 0; ei = 0;
      for (int pp = 0; pp < M; pp++) begin
        ur = 0; ui = 0;
        for (int t = 0; t < TAPS; t++) begin
          ur += h(t*M + pp) * xr[(6 - TAPS + 1 + t)*M + pp];
          ui += h(t*M + pp) * xi[(6 - TAPS + 1 + t)*M + pp];
        end
        er += ur * $cos(2.0*PI*k*pp/M) + ui * $sin(2.0*PI*k*pp/M);
        ei += ui * $cos(2.0*PI*k*pp/M) - ur * $sin(2.0*PI*k*pp/M);
      end
      checks++;
      if ((got_i[k] - er) > 300.0 || (er - got_i[k]) > 300.0 || (got_q[k] - ei) > 300.0 || (ei - got_q[k]) > 300.0) begin
        failures++;
        if (failures < 10) $display("bin %0d got %0d,%0d exp %f,%f", k, got_i[k], got_q[k], er, ei);
      end
    end
    checks++;
    if (nrx != M) begin failures++; $display("received %0d bins", nrx); end
    // the 2.44 MSPS bins: one frame of 256 bins per 256 input samples;
    // last bin of a frame leaves 1 + 263 input clocks after the frame's last sample
    checks++;
    if (last_out_cyc - last_in_cyc != 265) begin
      failures++; $display("latency %0d", last_out_cyc - last_in_cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
