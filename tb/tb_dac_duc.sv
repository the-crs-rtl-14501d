// tb_dac_duc: feeds the up-converter a slowly rotating complex phasor and
// compares all eight 14-bit outputs of every clock with a floating-point
// Re{x exp(j phase)} model (zero-order hold), one clock later; then checks
// that an over-range input saturates at the 14-bit limits.
// Rates follow the published design (625 MSPS to 5 GSPS, 14-bit DAC); the
// zero-order hold and the tolerance are this design's own.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_dac_duc;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic i_valid = 0;
  logic signed [15:0] i_i, i_q;
  logic [31:0] nco_inc;
  logic dac_valid;
  logic signed [13:0] dac_data [8];
  int checks = 0, failures = 0;
  real e [8];
  dac_duc dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    nco_inc = 32'd987654321; i_i = 0; i_q = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 300; n++) begin
      real xr, xi;
      @(negedge clk);
      if (n > 0)
        for (int k = 0; k < 8; k++) begin
          checks++;
          if (!dac_valid || (dac_data[k] - e[k]) > 20.0 || (e[k] - dac_data[k]) > 20.0) begin
            failures++;
            if (failures < 8) $display("n=%0d k=%0d got %0d exp %f", n, k, dac_data[k], e[k]);
          end
        end
      xr = $floor(20000.0 * $cos(0.01 * n)); xi = $floor(20000.0 * $sin(0.01 * n));
      i_valid = 1; i_i = 16'($rtoi(xr)); i_q = 16'($rtoi(xi));
      for (int k = 0; k < 8; k++) begin
        real a;
        a = 2.0 * PI * real'(32'((8*n + k) * nco_inc)) / 4294967296.0;
        e[k] = (xr * $cos(a) - xi * $sin(a)) / 4.0;
      end
    end
    @(negedge clk); i_i = 16'sh7FFF; i_q = -16'sh7FFF; nco_inc = 32'h2000_0000;
    @(negedge clk); @(negedge clk);
    checks++;
    // k = 1: phase pi/4 -> (cos + sin) * 32767 / 4 = 11585 > 8191
    if (dac_data[1] != 14'sd8191) begin failures++; $display("no saturation %0d", dac_data[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
