// tb_packetizer: sends three frames of 256 channels to a lane packetizer.
// Every header field and data word is checked, under random backpressure.
// A frame that arrives while the previous packet waits (ready held low) must
// be dropped and counted, and sequence numbers must count packets sent.
// The packet format checked here is this design's own; the published design
// only names the block.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_packetizer;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  lane_t in;
  logic [63:0] timestamp;
  logic o_valid, o_ready, o_last;
  logic [127:0] o_data;
  logic [31:0] seq;
  logic [15:0] drops;
  int checks = 0, failures = 0;
  int vi [3][256], vq [3][256];
  packetizer #(.MOD(2), .LANE(3)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic send(int f);
    for (int c = 0; c < 256; c++) begin
      @(negedge clk);
      in.valid = 1; in.chan = 8'(c); in.last = (c == 255); in.i = 32'(vi[f][c]); in.q = 32'(vq[f][c]);
      timestamp = 64'h1234_0000_0000_0000 + 64'(f);
    end
    @(negedge clk); in = '0;
  endtask
  task automatic receive(int f, int eseq, int rnd);
    int w;
    w = 0;
    while (w < 129) begin
      @(negedge clk);
      o_ready = rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
      #0;
      if (o_valid && o_ready) begin
        logic [127:0] e;
        if (w == 0) e = {PKT_MAGIC, 4'd2, 4'd3, 8'h0, 32'(eseq), 64'h1234_0000_0000_0000 + 64'(f)};
        else e = {32'(vq[f][2*w-1]), 32'(vi[f][2*w-1]), 32'(vq[f][2*w-2]), 32'(vi[f][2*w-2])};
        checks++;
        if (o_data != e || o_last != (w == 128)) begin
          failures++;
          if (failures < 6) $display("f=%0d w=%0d got %h exp %h", f, w, o_data, e);
        end
        w++;
      end
    end
    @(negedge clk); o_ready = 0;
  endtask
  initial begin
    in = '0; o_ready = 0; timestamp = 0;
    foreach (vi[f, c]) begin vi[f][c] = $urandom; vq[f][c] = $urandom; end
    repeat (3) @(negedge clk);
    rst = 0;
    send(0);
    fork receive(0, 0, 1); join
    send(0);           // packet with seq 1 stays pending (ready low)
    send(1);           // arrives while busy: dropped
    receive(0, 1, 0);
    checks++;
    if (drops != 16'd1) begin failures++; $display("drops %0d", drops); end
    send(2);
    receive(2, 2, 1);
    checks++;
    if (seq != 32'd3 || o_valid) begin failures++; $display("seq %0d", seq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
