// tb_channel_mux: four lanes present a frame of 256 channels each, one per
// clock per lane, with random I,Q. About a quarter of the channels are
// selected through R_MUX_SEL writes. A model queue per lane holds the
// selected samples in arrival order; every output sample must be the head
// of the queue of the lane its channel number names, and all queues must be
// empty at the end with overflow still clear. Then every channel of every
// lane is selected, four times what the output can take, and the sticky
// overflow flag must rise.
// Per-channel selection of native-rate data follows the published design;
// FIFOs, depths and the overflow rule are this design's own.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_channel_mux;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic        cfg_we;
  logic [15:0] cfg_addr;
  logic [63:0] cfg_wdata;
  lane_t       in [NLANES];
  logic        o_valid, overflow;
  logic [9:0]  o_chan;
  logic signed [CH_W-1:0] o_i, o_q;
  int checks = 0, failures = 0;
  bit selm [NLANES][256];
  logic [57:0] mq [NLANES][$];
  bit checking = 1;
  channel_mux dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) if (!rst && o_valid && checking) begin
    int l;
    logic [57:0] e;
    l = int'(o_chan[9:8]);
    checks++;
    if (mq[l].size() == 0) begin failures++; $display("unexpected output %h", o_chan); end
    else begin
      e = mq[l].pop_front();
      if ({o_chan, o_q, o_i} != e) begin
        failures++;
        if (failures < 6) $display("got %h exp %h", {o_chan, o_q, o_i}, e);
      end
    end
  end
  task automatic frame;
    for (int t = 0; t < 256; t++) begin
      @(negedge clk);
      for (int l = 0; l < NLANES; l++) begin
        in[l].valid = 1; in[l].chan = 8'(t); in[l].bin = 8'(t); in[l].last = (t == 255);
        in[l].i = 32'(24'($urandom)); in[l].q = 32'(24'($urandom));
        if (in[l].i[23]) in[l].i[31:24] = 8'hff;
        if (in[l].q[23]) in[l].q[31:24] = 8'hff;
        if (selm[l][t]) mq[l].push_back({2'(l), 8'(t), in[l].q[23:0], in[l].i[23:0]});
      end
    end
    @(negedge clk);
    for (int l = 0; l < NLANES; l++) in[l] = '0;
  endtask
  task automatic wr(int l, int t, bit v);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {R_MUX_SEL, 4'(l), 8'(t)}; cfg_wdata = 64'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask
  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int l = 0; l < NLANES; l++) in[l] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int l = 0; l < NLANES; l++)
      for (int t = 0; t < 256; t++) begin
        selm[l][t] = ($urandom_range(0, 3) == 0);
        if (selm[l][t]) wr(l, t, 1'b1);
      end
    frame();
    frame();
    repeat (100) @(negedge clk);
    for (int l = 0; l < NLANES; l++) begin
      checks++;
      if (mq[l].size() != 0) begin failures++; $display("lane %0d left %0d", l, mq[l].size()); end
    end
    checks++;
    if (overflow) begin failures++; $display("overflow at 1/4 load"); end
    checking = 0;
    for (int l = 0; l < NLANES; l++)
      for (int t = 0; t < 256; t++) begin
        selm[l][t] = 1;
        wr(l, t, 1'b1);
      end
    frame();
    checks++;
    if (!overflow) begin failures++; $display("no overflow at full load"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
