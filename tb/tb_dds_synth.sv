// tb_dds_synth: lane 0 synthesis DDS with random frequency, amplitude and
// phase per channel, and channels cycling through the three feedback modes
// with random controller outputs. Every output sample is compared with a
// floating-point model of (A [+ fb]) * exp(j(phi + theta)), the phase
// advancing by inc [+ fb.i << 8]. The bin tag must pass through.
// Per-channel frequency, amplitude and phase follow the published design; the
// fixed-point formats and tolerance are this design's own.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_dds_synth;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [63:0] cfg_wdata = 0;
  lane_t fb, out;
  fb_mode_e fb_mode;
  int checks = 0, failures = 0;
  int unsigned inc [256], ph [256];
  int amp [256], th [256];
  real er, eq, tol;
  int et, ebin;
  dds_synth #(.LANE(0)) dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    fb = '0; fb_mode = FB_OFF;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 256; t++) begin
      inc[t] = $urandom; amp[t] = $urandom_range(0, 30000); th[t] = $urandom_range(0, 65535); ph[t] = 0;
      @(negedge clk); cfg_we = 1; cfg_addr = {4'(R_CH_FREQ), 4'd0, 8'(t)}; cfg_wdata = {24'h0, 8'h7, inc[t]};
      @(negedge clk); cfg_addr = {4'(R_CH_AMPPH), 4'd0, 8'(t)}; cfg_wdata = {32'h0, 16'(th[t]), 16'(amp[t])};
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 5; n++)
      for (int t = 0; t < 256; t++) begin
        int fi, fq, m;
        real ci, cq, a;
        @(negedge clk);
        if (n > 0 || t > 0) begin
          checks++;
          if (!out.valid || out.chan != 8'(et) || out.bin != 8'(ebin) || (out.i - er) > tol || (er - out.i) > tol || (out.q - eq) > tol || (eq - out.q) > tol) begin
            failures++;
            if (failures < 8) $display("n=%0d t=%0d got %0d %0d exp %f %f", n, et, out.i, out.q, er, eq);
          end
        end
        m = (t + n) % 3;
        fi = $signed(16'($urandom)) / 2; fq = $signed(16'($urandom)) / 2;
        fb.valid = 1; fb.chan = 8'(t); fb.bin = 8'(255 - t); fb.last = (t == 255); fb.i = 32'(fi); fb.q = 32'(fq);
        fb_mode = fb_mode_e'(m);
        ci = amp[t] + ((m == 1) ? fi : 0);
        cq = (m == 1) ? fq : 0;
        a = 2.0 * PI * real'(32'(ph[t] + 32'(th[t] << 16))) / 4294967296.0;
        er = ci * $cos(a) - cq * $sin(a);
        eq = ci * $sin(a) + cq * $cos(a);
        // 10-bit phase table: error up to |c| * pi / 1024
        tol = 4.0 + 0.0032 * $sqrt(ci * ci + cq * cq);
        et = t; ebin = 255 - t;
        ph[t] = ph[t] + inc[t] + ((m == 2) ? 32'(fi <<< 8) : 0);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
