// tb_combiner: three sources send packets of random length at random times
// into the combiner under random output backpressure. Each word carries its
// source, packet number and word index, so the checker can tell that every
// packet leaves whole and in order, that o_sel names its source, and that no
// word is lost, duplicated or reordered. Handshakes are sampled at the clock
// edge and the stimulus changes with nonblocking assignments after it.
// Round-robin at packet boundaries is this design's own policy; the
// published design only names the block.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_combiner;
  localparam int N = 3, NPK = 40;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic        i_valid [N], i_ready [N], i_last [N];
  logic [31:0] i_data [N];
  logic        o_valid, o_ready, o_last;
  logic [31:0] o_data;
  logic [1:0]  o_sel;
  int checks = 0, failures = 0;
  int plen [N][NPK];
  int spk [N], sw [N];           // source: packet and word being offered
  int rpk [N], rw [N];           // checker: next expected packet and word
  int cur = -1, done_pk = 0;
  combiner #(.N(N), .W(32)) dut (.*);
  function automatic logic [31:0] wd(int s, int p, int w);
    return {4'(s), 12'(p), 8'(w), 8'(plen[s][p])};
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
        if (i_valid[s] && i_ready[s]) begin
          if (i_last[s]) begin spk[s]++; sw[s] = 0; end else sw[s]++;
        end
        if (spk[s] < NPK && (i_valid[s] && !(i_ready[s]) || $urandom_range(0, 2) != 0)) begin
          i_valid[s] <= 1'b1;
          i_data[s]  <= wd(s, spk[s], sw[s]);
          i_last[s]  <= (sw[s] == plen[s][spk[s]] - 1);
        end else i_valid[s] <= 1'b0;
      end
      if (o_valid && o_ready) begin
        int s;
        s = int'(o_data[31:28]);
        checks++;
        if (s >= N || o_sel != 2'(s) || (cur >= 0 && cur != s) ||
            o_data != wd(s, rpk[s], rw[s]) || o_last != (rw[s] == plen[s][rpk[s]] - 1)) begin
          failures++;
          if (failures < 6) $display("bad word %h sel %0d cur %0d", o_data, o_sel, cur);
        end
        if (o_last) begin cur = -1; rpk[s]++; rw[s] = 0; done_pk++; end
        else begin cur = s; rw[s]++; end
      end
      o_ready <= ($urandom_range(0, 3) != 0);
    end
  end
  initial begin
    for (int s = 0; s < N; s++) begin
      i_valid[s] = 0; i_last[s] = 0; i_data[s] = 0; spk[s] = 0; sw[s] = 0; rpk[s] = 0; rw[s] = 0;
      for (int p = 0; p < NPK; p++) plen[s][p] = $urandom_range(1, 9);
    end
    o_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    wait (done_pk == N * NPK);
    repeat (5) @(negedge clk);
    checks++;
    if (o_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
