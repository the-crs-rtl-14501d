// tb_adc_ddc: feeds the DDC a real tone near its NCO frequency and compares
// every decimated (I,Q) sample with a floating-point mix-and-sum model;
// also checks the one-clock latency.
// Rates (8 samples of 5 GSPS per clock, /8 to 625 MSPS) follow the published
// design; the tone levels and the tolerance are this testbench's choice.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_adc_ddc;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic adc_valid = 0;
  logic signed [13:0] adc_data [8];
  logic [31:0] nco_inc;
  logic o_valid;
  logic signed [15:0] o_i, o_q;
  int checks = 0, failures = 0;
  adc_ddc dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  real ei, eq;
  real ph0;
  initial begin
    nco_inc = 32'd123456789;          // ~143.7 MHz at 5 GSPS
    foreach (adc_data[k]) adc_data[k] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      // check the previous clock's output
      if (n > 0) begin
        checks++;
        if (!o_valid || (o_i - ei) > 40.0 || (ei - o_i) > 40.0 || (o_q - eq) > 40.0 || (eq - o_q) > 40.0) begin
          failures++;
          if (failures < 8) $display("n=%0d got %0d %0d exp %f %f v=%0d", n, o_i, o_q, ei, eq, o_valid);
        end
      end
      ei = 0; eq = 0;
      for (int k = 0; k < 8; k++) begin
        real x, a;
        int s;
        s = 8*n + k;
        x = $floor(7000.0 * $cos(2.0*PI*0.0291*s) + 0.5);
        adc_data[k] <= 14'($rtoi(x));
        a = 2.0*PI*real'(32'(s * nco_inc)) / 4294967296.0;
        ei += x * $cos(a) / 2.0;
        eq -= x * $sin(a) / 2.0;
      end
      adc_valid <= 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
