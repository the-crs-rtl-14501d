// tb_dds_demod: gives every channel of lane 2 its own residual frequency and
// feeds it the matching rotating phasor for 6 frames; the DDS must bring each
// to its constant starting value. Every output is compared with a
// floating-point x*exp(-j*n*inc) model (tolerance for the 10-bit table).
// Per-channel demodulation follows the published design; the 10-bit table
// tolerance is set by this design's own table size.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_dds_demod;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [63:0] cfg_wdata = 0;
  lane_t in, out;
  int checks = 0, failures = 0;
  int unsigned inc [256];
  real ei [256], eq [256];
  dds_demod #(.LANE(2)) dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    in = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 256; t++) begin
      inc[t] = $urandom;
      @(negedge clk);
      cfg_we = 1; cfg_addr = {4'(R_CH_FREQ), 2'b0, 2'd2, 8'(t)}; cfg_wdata = {24'h0, 8'h33, inc[t]};
    end
    // a write to another lane must not land here
    @(negedge clk); cfg_addr = {4'(R_CH_FREQ), 2'b0, 2'd1, 8'd5}; cfg_wdata = 64'hFFFF;
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 6; n++)
      for (int t = 0; t < 256; t++) begin
        real a, xr, xi, amp;
        amp = 1000.0 + 20000.0 * t / 256.0;
        a = 2.0 * PI * (real'(32'(n * inc[t])) / 4294967296.0 + t / 256.0);
        xr = $floor(amp * $cos(a) + 0.5); xi = $floor(amp * $sin(a) + 0.5);
        @(negedge clk);
        if (n > 0 || t > 0) begin
          int pt;
          pt = (t == 0) ? 255 : t - 1;
          checks++;
          if (!out.valid || out.chan != 8'(pt) || (out.i - ei[pt]) > 80.0 || (ei[pt] - out.i) > 80.0 || (out.q - eq[pt]) > 80.0 || (eq[pt] - out.q) > 80.0) begin
            failures++;
            if (failures < 8) $display("n=%0d t=%0d got %0d %0d exp %f %f", n, pt, out.i, out.q, ei[pt], eq[pt]);
          end
        end
        in.valid = 1; in.chan = 8'(t); in.bin = 8'(t ^ 8'h5A); in.last = (t == 255);
        in.i = 32'($rtoi(xr)); in.q = 32'($rtoi(xi));
        // expected: constant phasor at the channel's starting phase
        ei[t] = amp * $cos(2.0 * PI * t / 256.0); eq[t] = amp * $sin(2.0 * PI * t / 256.0);
      end
    @(negedge clk);
    checks++;
    if (out.bin != 8'(255 ^ 8'h5A) || !out.last) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
