// tb_cic_decimator: runs a CIC1 instance (/64, 24-bit out) and a CIC2
// instance (/16, /32 and /64 on successive runs, 32-bit out) on 256 channels
// of random data and compares every output with a direct FIR model: the
// convolution of three length-R boxcars applied to the input, scaled by
// 2^(3 log2 R) (CIC1) or 2^(3 log2 R - 8) (CIC2). Checks the output rate.
// The rates /64 and /16, /32, /64 follow the published design; the order,
// widths and output scaling checked here are this design's own.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_cic_decimator;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  lane_t in, out1, out2;
  logic [2:0] l2;
  int checks = 0, failures = 0;
  localparam int NF = 200, NC = 256;
  int x [NF][NC];
  int n1 = 0, n2 = 0;
  cic_decimator #(.OUT_W(24)) u1 (.clk, .rst, .log2r(3'd6), .in, .out(out1));
  cic_decimator #(.OUT_W(32)) u2 (.clk, .rst, .log2r(l2), .in, .out(out2));
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // reference: y[m] = sum_j g[j] x[(m+1)R-1-j], g = box*box*box
  function automatic longint ref_y(int m, int c, int r);
    longint g [3*64];
    longint b [3*64];
    longint acc;
    for (int j = 0; j < 3*r; j++) g[j] = (j < r) ? 1 : 0;
    for (int s = 0; s < 2; s++) begin
      for (int j = 0; j < 3*r; j++) begin
        b[j] = 0;
        for (int i = 0; i < r; i++) if (j - i >= 0) b[j] += g[j-i];
      end
      for (int j = 0; j < 3*r; j++) g[j] = b[j];
    end
    acc = 0;
    for (int j = 0; j < 3*r - 2; j++) begin
      int n;
      n = (m+1)*r - 1 - j;
      if (n >= 0) acc += g[j] * x[n][c];
    end
    return acc;
  endfunction
  int cur_f;
  always @(negedge clk) begin
    if (out1.valid) begin
      longint e;
      int m;
      m = (cur_f + 1) / 64 - 1;
      e = ref_y(m, out1.chan, 64);
      checks++; n1++;
      if (out1.i != 32'(e >>> 18) || out1.q != 32'((-e) >>> 18)) begin failures++; if (failures < 6) $display("cic1 m=%0d c=%0d got %0d exp %0d", m, out1.chan, out1.i, e); end
    end
    if (out2.valid) begin
      longint e, eq;
      int m, r;
      r = 1 << l2;
      m = (cur_f + 1) / r - 1;
      e = ref_y(m, out2.chan, r);
      eq = (-e) >>> (3 * l2 - 8);
      e = e >>> (3 * l2 - 8);
      checks++; n2++;
      if (out2.i != 32'(e) || out2.q != 32'(eq)) begin failures++; if (failures < 6) $display("cic2 m=%0d c=%0d got %0d exp %0d", m, out2.chan, out2.i, e); end
    end
  end
  task automatic run(int r2);
    rst = 1; l2 = 3'(r2);
    @(negedge clk); @(negedge clk); rst = 0;
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < NC; c++) begin
        @(negedge clk);
        in.valid = 1; in.chan = 8'(c); in.last = (c == NC - 1); in.bin = 0;
        in.i = 32'(x[f][c]); in.q = 32'(-x[f][c]);
        cur_f = f;
      end
    @(negedge clk); in = '0; @(negedge clk);
  endtask
  initial begin
    in = '0; l2 = 4;
    foreach (x[f, c]) x[f][c] = (c == 3) ? 8388607 : (c == 4) ? -8388607 : $signed(24'($urandom));
    for (int r2 = 4; r2 <= 6; r2++) begin
      n1 = 0; n2 = 0;
      run(r2);
      checks++;
      if (n1 != (NF / 64) * NC || n2 != (NF >> r2) * NC) begin failures++; $display("rate: %0d %0d", n1, n2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
