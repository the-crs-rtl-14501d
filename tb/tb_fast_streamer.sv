// tb_fast_streamer: runs the fast streamer (8 data words per packet, 16-word
// FIFO) through a 2-packet ADC capture routed to 100G, a 3-packet channel
// (PFB) capture routed to DMA, and a continuous ADC capture with the output
// blocked. A model packs the same input samples into the expected header and
// data words; the output, read under random backpressure, must match word
// for word, with o_last on each packet's final word, the capture must stop
// after its length, the sequence number must run on across captures, and
// the blocked continuous capture must set the sticky overflow flag.
// Raw and channel capture, discrete or continuous, follow the published
// design; packet format and overflow policy are this design's own.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_fast_streamer;
  import crs_pkg::*;
  localparam int PW = 8;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic        cfg_we;
  logic [15:0] cfg_addr;
  logic [63:0] cfg_wdata;
  logic        adc_valid, ch_valid;
  logic signed [BB_W-1:0] adc_i, adc_q;
  logic [9:0]  ch_chan;
  logic signed [CH_W-1:0] ch_i, ch_q;
  logic        o_valid, o_ready, o_last, o_dest, overflow, active;
  logic [127:0] o_data;
  int checks = 0, failures = 0;
  logic [128:0] exq [$];
  logic [127:0] acc;
  int seq = 0;
  fast_streamer #(.MOD(5), .PKT_WORDS(PW), .FIFO_DEPTH(16)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (!rst) begin
    if (o_valid && o_ready) begin
      checks++;
      if (exq.size() == 0) begin failures++; $display("unexpected word %h", o_data); end
      else begin
        logic [128:0] e;
        e = exq.pop_front();
        if ({o_last, o_data} != e) begin
          failures++;
          if (failures < 6) $display("got %b %h exp %h", o_last, o_data, e);
        end
      end
    end
  end
  task automatic wr(logic [11:0] r, logic [63:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {R_GLOBAL, r}; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask
  // one capture of npk packets; mode 1 = ADC (4 samples/word), 2 = PFB (2)
  task automatic capture(int mode, int npk, bit dest);
    int spw, k;
    spw = (mode == 1) ? 4 : 2;
    wr(G_FS_CTRL, {32'(npk), 28'h0, 1'b0, dest, 2'(mode)});
    wr(G_FS_ARM, 64'h1);
    k = 0;
    while (k < npk * PW * spw) begin
      @(negedge clk);
      o_ready = ($urandom_range(0, 3) != 0);
      adc_valid = 0; ch_valid = 0;
      if ($urandom_range(0, 3) != 0) begin
        logic [63:0] s;
        adc_i = BB_W'($urandom); adc_q = BB_W'($urandom);
        ch_chan = 10'($urandom); ch_i = CH_W'($urandom); ch_q = CH_W'($urandom);
        if (mode == 1) begin adc_valid = 1; s = {32'h0, adc_q, adc_i}; end
        else begin ch_valid = 1; s = {6'h0, ch_chan, ch_q, ch_i}; end
        if (k % (PW * spw) == 0) begin
          exq.push_back({1'b0, FS_MAGIC, 2'(mode), 4'd5, 10'h0, 32'(seq), 64'h0});
          seq++;
        end
        if (mode == 1) acc = {s[31:0], acc[127:32]};
        else acc = {s, acc[127:64]};
        if (k % spw == spw - 1) exq.push_back({(k % (PW * spw) == PW * spw - 1), acc});
        k++;
      end
    end
    // more input after the end must be ignored
    for (int j = 0; j < 40; j++) begin
      @(negedge clk);
      o_ready = 1; adc_valid = 1; ch_valid = 1;
    end
    adc_valid = 0; ch_valid = 0;
    repeat (60) @(negedge clk);
    checks += 3;
    if (exq.size() != 0) begin failures++; $display("%0d words missing", exq.size()); end
    if (active) begin failures++; $display("capture did not stop"); end
    if (o_dest != dest) begin failures++; $display("dest"); end
  endtask
  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; o_ready = 0;
    adc_valid = 0; ch_valid = 0; adc_i = 0; adc_q = 0; ch_chan = 0; ch_i = 0; ch_q = 0; acc = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    capture(1, 2, 1'b1);
    capture(2, 3, 1'b0);
    checks++;
    if (overflow) begin failures++; $display("early overflow"); end
    wr(G_FS_CTRL, {32'd0, 28'h0, 1'b1, 1'b0, 2'd1});
    wr(G_FS_ARM, 64'h1);
    o_ready = 0;
    @(negedge clk);
    adc_valid = 1;
    repeat (200) @(negedge clk);
    adc_valid = 0;
    checks += 2;
    if (!overflow) begin failures++; $display("no overflow"); end
    if (!active) begin failures++; $display("continuous stopped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
