// tb_packetizer_100g: three sources send packets of random length to the
// 100G packetizer under random backpressure. The checker expects each packet
// to be preceded by exactly one tag word {Q_MAGIC, source, 0, frame count, 0},
// followed by the packet's words unchanged with q_last only on the final
// word, and the frame counter to equal the number of packets at the end.
// The tag format is this design's own; the published design only names the
// block.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_packetizer_100g;
  import crs_pkg::*;
  localparam int N = 3, NPK = 30;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic         s_valid [N], s_ready [N], s_last [N];
  logic [127:0] s_data [N];
  logic         q_valid, q_ready, q_last;
  logic [127:0] q_data;
  logic [31:0]  frames;
  int checks = 0, failures = 0;
  int plen [N][NPK];
  int spk [N], sw [N], rpk [N], rw [N];
  int done_pk = 0, cur = -1;
  packetizer_100g #(.NSRC(N)) dut (.*);
  function automatic logic [127:0] wd(int s, int p, int w);
    return {4'(s), 12'(p), 8'(w), 8'(plen[s][p]), 96'h0fed_cba9_8765_4321_3333_cccc};
  endfunction
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) begin
    if (!rst) begin
      for (int s = 0; s < N; s++) begin
        if (s_valid[s] && s_ready[s]) begin
          if (s_last[s]) begin spk[s]++; sw[s] = 0; end else sw[s]++;
        end
        if (spk[s] < NPK && (s_valid[s] && !s_ready[s] || $urandom_range(0, 2) != 0)) begin
          s_valid[s] <= 1'b1;
          s_data[s]  <= wd(s, spk[s], sw[s]);
          s_last[s]  <= (sw[s] == plen[s][spk[s]] - 1);
        end else s_valid[s] <= 1'b0;
      end
      if (q_valid && q_ready) begin
        checks++;
        if (cur < 0) begin
          // tag word; source taken from it
          cur = int'(q_data[111:104]);
          if (q_data[127:112] != Q_MAGIC || cur >= N || q_data[103:96] != 8'h0 ||
              q_data[95:64] != 32'(done_pk) || q_data[63:0] != 64'h0 || q_last) begin
            failures++;
            if (failures < 6) $display("bad tag %h", q_data);
            cur = 0;
          end
        end else begin
          if (q_data != wd(cur, rpk[cur], rw[cur]) || q_last != (rw[cur] == plen[cur][rpk[cur]] - 1)) begin
            failures++;
            if (failures < 6) $display("bad word %h", q_data[127:96]);
          end
          if (rw[cur] == plen[cur][rpk[cur]] - 1) begin rpk[cur]++; rw[cur] = 0; done_pk++; cur = -1; end
          else rw[cur]++;
        end
      end
      q_ready <= ($urandom_range(0, 3) != 0);
    end
  end
  initial begin
    for (int s = 0; s < N; s++) begin
      s_valid[s] = 0; s_last[s] = 0; s_data[s] = 0; spk[s] = 0; sw[s] = 0; rpk[s] = 0; rw[s] = 0;
      for (int p = 0; p < NPK; p++) plen[s][p] = $urandom_range(1, 9);
    end
    q_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    wait (done_pk == N * NPK);
    repeat (5) @(negedge clk);
    checks++;
    if (frames != 32'(N * NPK) || q_valid) begin failures++; $display("frames %0d", frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
