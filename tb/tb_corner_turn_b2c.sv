// tb_corner_turn_b2c: assigns random bins to all 1,024 channels through the
// frequency words, sends two PFB frames whose bin values encode frame and
// bin, and checks that every channel of every lane receives its own bin's
// value, in channel order, starting two clocks after the frame's last bin.
// The 1,024-channel / 256-bin sizes follow the published design; the lane
// layout and bin-rounding rule checked here are this design's own.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_corner_turn_b2c;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr;
  logic [63:0] cfg_wdata;
  logic i_valid = 0, i_last = 0;
  logic [7:0] i_bin;
  logic signed [23:0] i_i, i_q;
  lane_t out [4];
  int checks = 0, failures = 0;
  int bsel [1024];
  int cyc = 0, last_cyc = 0, first_out = -1, nout = 0;
  corner_turn_b2c dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) begin
    cyc <= cyc + 1;
    for (int l = 0; l < 4; l++) if (out[l].valid) begin
      int c, fr;
      c = l*256 + out[l].chan;
      fr = (nout < 1024) ? 0 : 1;
      if (first_out < 0) first_out = cyc;
      checks++;
      if (out[l].i != 32'(fr*1000 + bsel[c]) || out[l].q != 32'(-bsel[c]) || out[l].chan != 8'((nout % 1024) / 4)) begin
        failures++;
        if (failures < 8) $display("ch %0d got %0d exp %0d", c, out[l].i, fr*1000 + bsel[c]);
      end
      nout++;
    end
  end
  initial begin
    i_bin = 0; i_i = 0; i_q = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 1024; c++) begin
      logic [39:0] f;
      bsel[c] = $urandom_range(0, 255);
      // frequency word: bin in the top 8 bits, residual within +-half a bin
      f = {8'(bsel[c]), 32'h0} + 40'($signed(32'($urandom_range(0, 32'hFFFFFFF)) - 32'h8000000));
      @(negedge clk);
      cfg_we = 1; cfg_addr = {4'(R_CH_FREQ), 2'b0, 10'(c)}; cfg_wdata = 64'(f);
    end
    @(negedge clk); cfg_we = 0;
    for (int fr = 0; fr < 2; fr++) begin
      for (int p = 0; p < 256; p++) begin
        @(negedge clk);
        i_valid = 1; i_bin = 8'(bitrev(16'(p), 8)); i_last = (p == 255);
        i_i = 24'(fr*1000 + bitrev(16'(p), 8)); i_q = -24'(bitrev(16'(p), 8));
        if (fr == 0 && p == 255) last_cyc = cyc;
      end
    end
    @(negedge clk); i_valid = 0; i_last = 0;
    repeat (300) @(negedge clk);
    checks++;
    if (nout != 2048) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (first_out - last_cyc != 2) begin failures++; $display("latency %0d", first_out - last_cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
