// tb_pfb_synthesis: feeds 6 frames of random bin values (natural order) and
// compares output frames 4 and 5 sample by sample with a floating-point
// model of the inverse DFT followed by the polyphase synthesis FIR; also
// checks a single-bin frame sequence gives a tone and the frame latency.
// The 256-bin size follows the published design; the model repeats this
// design's own prototype filter and output scaling.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_pfb_synthesis;
  import crs_pkg::*;
  localparam int M = 256, TAPS = 4, NFR = 8;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic i_valid = 0;
  logic signed [23:0] i_i, i_q;
  logic o_valid;
  logic signed [15:0] o_i, o_q;
  int checks = 0, failures = 0;
  real xr [NFR][M], xi [NFR][M];
  real vr [NFR][M], vi [NFR][M];
  int gi [NFR*M], gq [NFR*M];
  int nout = 0, cyc = 0, lastin = 0, firstout = -1;
  pfb_synthesis dut (.*);
  initial begin
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
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (o_valid) begin
      if (firstout < 0) firstout = cyc;
      gi[nout] = o_i; gq[nout] = o_q; nout++;
    end
  end
  initial begin
    i_i = 0; i_q = 0;
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < M; k++) begin
        xr[f][k] = $signed(24'($urandom)) / 2048; xi[f][k] = $signed(24'($urandom)) / 2048;
      end
    // inverse DFT
    for (int f = 0; f < NFR; f++)
      for (int p = 0; p < M; p++) begin
        vr[f][p] = 0; vi[f][p] = 0;
        for (int k = 0; k < M; k++) begin
          real c, s;
          c = $cos(2.0*PI*k*p/M); s = $sin(2.0*PI*k*p/M);
          vr[f][p] += xr[f][k]*c - xi[f][k]*s;
          vi[f][p] += xr[f][k]*s + xi[f][k]*c;
        end
      end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < M; k++) begin
        @(negedge clk);
        i_valid = 1; i_i = 24'($rtoi(xr[f][k])); i_q = 24'($rtoi(xi[f][k]));
        if (f == 0 && k == 255) lastin = cyc;
      end
    @(negedge clk); i_valid = 0;
    repeat (600) @(negedge clk);
    // IFFT output of frame f is complete 263 valid clocks after its last bin,
    // so frames 0..5 reach the FIR when 8 frames have been fed.
    checks++;
    if (nout != 6*M) begin failures++; end

    for (int f = 4; f < 6; f++)
      for (int p = 0; p < M; p++) begin
        real er, ei;
        er = 0; ei = 0;
        for (int t = 0; t < TAPS; t++) begin
          er += h(t*M + p) * vr[f-t][p];
          ei += h(t*M + p) * vi[f-t][p];
        end
        er = er / 256.0; ei = ei / 256.0;
        checks++;
        if ((gi[f*M+p] - er) > 3.0 || (er - gi[f*M+p]) > 3.0 || (gq[f*M+p] - ei) > 3.0 || (ei - gq[f*M+p]) > 3.0) begin
          failures++;
          if (failures < 2) $display("f=%0d p=%0d got %0d %0d exp %f %f", f, p, gi[f*M+p], gq[f*M+p], er, ei);
        end
      end
    checks++;
    if (firstout - lastin != 265) begin failures++; $display("latency %0d", firstout - lastin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
