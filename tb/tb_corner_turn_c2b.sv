// tb_corner_turn_c2b: four lanes of 256 channels with random bins (many
// sharing a bin, across and within lanes) and random samples for three
// frames; every output bin must equal the saturated sum of its channels,
// in natural order, starting two clocks after the last channel.
// Channel-to-bin summation follows from the coupled synthesis PFB of the
// published design; widths and saturation are this design's own.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_corner_turn_c2b;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  lane_t in [4];
  logic o_valid, o_last;
  logic [7:0] o_bin;
  logic signed [23:0] o_i, o_q;
  int checks = 0, failures = 0;
  longint si [3][256], sq [3][256];
  int nout = 0, cyc = 0, lastc = 0, firsto = -1;
  corner_turn_c2b dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic longint s24(longint x);
    return x > 8388607 ? 8388607 : x < -8388608 ? -8388608 : x;
  endfunction
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (o_valid) begin
      int f, k;
      f = nout / 256; k = nout % 256;
      if (firsto < 0) firsto = cyc;
      checks++;
      if (o_bin != 8'(k) || o_last != (k == 255) || o_i != 24'(s24(si[f][k])) || o_q != 24'(s24(sq[f][k]))) begin
        failures++;
        if (failures < 8) $display("f=%0d k=%0d got %0d exp %0d", f, k, o_i, s24(si[f][k]));
      end
      nout++;
    end
  end
  initial begin
    foreach (in[l]) in[l] = '0;
    foreach (si[f, k]) begin si[f][k] = 0; sq[f][k] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < 3; f++)
      for (int t = 0; t < 256; t++) begin
        @(negedge clk);
        for (int l = 0; l < 4; l++) begin
          int b, xi, xq;
          b = (f == 2 && l == 0) ? 17 : $urandom_range(0, 40) * 6;   // frame 2: lane 0 all in bin 17
          xi = $signed(24'($urandom)) / 16; xq = $signed(24'($urandom)) / 16;
          in[l].valid = 1; in[l].chan = 8'(t); in[l].bin = 8'(b); in[l].last = (t == 255);
          in[l].i = 32'(xi); in[l].q = 32'(xq);
          si[f][b] += xi; sq[f][b] += xq;
        end
        if (f == 0 && t == 255) lastc = cyc;
      end
    @(negedge clk);
    foreach (in[l]) in[l] = '0;
    repeat (300) @(negedge clk);
    checks++;
    if (nout != 768) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (firsto - lastc != 2) begin failures++; $display("latency %0d", firsto - lastc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
