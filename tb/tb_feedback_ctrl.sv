// tb_feedback_ctrl: runs lane 1's controller for 40 frames with a per-channel
// mix of modes, complex gains, offsets and random inputs, and checks every
// controller output against an integer model of the published loop
// (gain -> integrator -> saturation -> offset). A small saturation limit makes
// the clamp act; a clear write and the pass-through of the sample are checked.
module tb_feedback_ctrl;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [63:0] cfg_wdata = 0;
  lane_t in, out, fb;
  fb_mode_e fb_mode;
  int checks = 0, failures = 0, nsat = 0;
  longint gi [256], gq [256], oi [256], oq [256], ai [256], aq [256];
  int md [256];
  longint ex_i, ex_q, ex_pi;
  int ex_md, ex_t;
  localparam longint LIM = 3000000;
  feedback_ctrl #(.LANE(1)) dut (.*);
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic longint s32(longint x);
    if (x > 64'sd2147483647) return 64'sd2147483647;
    if (x < -64'sd2147483648) return -64'sd2147483648;
    return x;
  endfunction
  task automatic wr(logic [3:0] r, int t, logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = {r, 2'b0, 2'd1, 8'(t)}; cfg_wdata = d;
  endtask
  initial begin
    in = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk); cfg_we = 1; cfg_addr = {4'(R_GLOBAL), G_FB_SAT}; cfg_wdata = 64'(LIM);
    for (int t = 0; t < 256; t++) begin
      gi[t] = $signed(16'($urandom)) / 4; gq[t] = $signed(16'($urandom)) / 4;
      oi[t] = $signed(24'($urandom)) / 8; oq[t] = $signed(24'($urandom)) / 8;
      md[t] = t % 3; ai[t] = 0; aq[t] = 0;
      wr(R_FB_GAIN, t, {32'h0, 16'(gq[t]), 16'(gi[t])});
      wr(R_FB_OFS, t, {8'h0, 24'(oq[t]), 8'h0, 24'(oi[t])});
      wr(R_FB_MODE, t, 64'(md[t]));
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 40; n++)
      for (int t = 0; t < 256; t++) begin
        longint xi, xq, ei, eq, ci, cq;
        @(negedge clk);
        if (n == 20 && t == 7) begin   // clear channel 9's accumulator mid-run
          cfg_we = 1; cfg_addr = {4'(R_FB_MODE), 2'b0, 2'd1, 8'd9}; cfg_wdata = 64'(md[9]) | 64'h4;
          ai[9] = 0; aq[9] = 0;
        end else cfg_we = 0;
        if (n > 0 || t > 0) begin
          checks++;
          if (!fb.valid || fb.chan != 8'(ex_t) || fb.i != 32'(ex_i) || fb.q != 32'(ex_q) || fb_mode != fb_mode_e'(ex_md) || out.i != 32'(ex_pi)) begin
            failures++;
            if (failures < 3) $display("n=%0d t=%0d got %0d %0d exp %0d %0d oi=%0d gi=%0d ai=%0d dut_oi=%0d dut_ai=%0d", n, ex_t, fb.i, fb.q, ex_i, ex_q, oi[ex_t], gi[ex_t], ai[ex_t], dut.oi[ex_t], dut.ai[ex_t]);
          end
        end
        xi = $signed(24'($urandom)) / 4; xq = $signed(24'($urandom)) / 4;
        if (t == 9 && n > 20) begin xi = 0; xq = 0; end
        in.valid = 1; in.chan = 8'(t); in.last = (t == 255); in.i = 32'(xi); in.q = 32'(xq);
        ei = (gi[t] * xi - gq[t] * xq) >>> 15;
        eq = (gi[t] * xq + gq[t] * xi) >>> 15;
        if (md[t] != 0) begin ai[t] = s32(ai[t] + ei); aq[t] = s32(aq[t] + eq); end
        ci = ai[t] > LIM ? LIM : ai[t] < -LIM ? -LIM : ai[t];
        cq = aq[t] > LIM ? LIM : aq[t] < -LIM ? -LIM : aq[t];
        if (ci != ai[t]) nsat++;
        ex_i = ci + oi[t]; ex_q = cq + oq[t];
        if (ex_i > 8388607) ex_i = 8388607; if (ex_i < -8388608) ex_i = -8388608;
        if (ex_q > 8388607) ex_q = 8388607; if (ex_q < -8388608) ex_q = -8388608;
        ex_md = md[t]; ex_t = t; ex_pi = xi;
      end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never reached"); end
    checks++;
    if (ai[9] != 0 && md[9] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
