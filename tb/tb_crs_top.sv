// tb_crs_top: end-to-end test of the full four-module system at its default
// size. Every module receives its own ADC tone; the test configures, through
// the one control bus, a mix of activities across the modules and counts
// how often each mechanism of the design is seen:
//   dma_slow   slow-path packets written by the DMA master to the ring of
//              their module (header checked, address = ring base + pointer)
//   dma_stall  DMA writes held by memory backpressure (random m_ready)
//   dma_fast   a fast-streamer capture routed to the DMA master (module 3)
//   q_fast     a fast-streamer capture routed to the 100G packetizer (module 2)
//   q_slow     slow-path packets of module 1 routed to the 100G packetizer
//   q_stall    100G words held by backpressure
//   fs_ovf     fast-streamer FIFO overflow (module 0, continuous, 100G blocked)
//   mux_ovf    channel-mux overflow (module 1, all channels of two lanes)
//   rate_sw    CIC2 rate switched to /32 on module 3
//   fb_on      feedback active on a channel of module 0
// A mechanism that never occurs counts as a failure. Content checks: the
// 100G tag names the source of the packet that follows; every DMA header's
// module field matches the ring it is written to.
// Four modules at 1,024 channels and the DMA / 100G outputs follow the
// published design; the set of activities is this testbench's choice.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_crs_top;
  import crs_pkg::*;
  localparam int NM = 4;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic         cfg_we;
  logic [17:0]  cfg_addr;
  logic [63:0]  cfg_wdata;
  logic [63:0]  timestamp;
  logic         adc_valid [NM], dac_valid [NM];
  logic signed [ADC_W-1:0] adc_data [NM][NSUB], dac_data [NM][NSUB];
  logic         m_valid, m_ready, q_valid, q_ready, q_last;
  logic [31:0]  m_addr, q_frames;
  logic [127:0] m_data, q_data;
  logic [31:0]  dma_wr_ptr [2*NM], dma_pkts [2*NM];
  logic         mux_overflow [NM], fs_overflow [NM], fb_active [NM];
  logic [15:0]  pkt_drops [NM];
  logic [2:0]   cic2_log2r [NM];
  int checks = 0, failures = 0;
  int dma_slow = 0, dma_stall = 0, dma_fast = 0, q_fast = 0, q_slow = 0, q_stall = 0;
  int fs_ovf = 0, mux_ovf = 0, rate_sw = 0, fb_on = 0;
  real ph [NM];
  localparam real PI = 3.14159265358979;
  crs_top dut (.*);

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("timeout: dma_slow=%0d q_slow=%0d q_fast=%0d drops=%0d %0d", dma_slow, q_slow, q_fast, pkt_drops[0], pkt_drops[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) begin
    timestamp <= timestamp + 1;
    for (int m = 0; m < NM; m++)
      for (int k = 0; k < NSUB; k++) begin
        adc_data[m][k] <= ADC_W'($rtoi($floor(2500.0 * $cos(2.0 * PI * ph[m]) + 0.5)));
        ph[m] = ph[m] + real'(m + 3) / 2048.0;
        if (ph[m] > 1.0) ph[m] = ph[m] - 1.0;
      end
  end

  // DMA side
  bit m_hold = 0;
  always @(posedge clk) if (!rst) begin
    if (m_valid && !m_ready) dma_stall++;
    if (m_valid && m_ready) begin
      int src;
      src = int'(m_addr[31:24]);
      if (m_data[127:112] == PKT_MAGIC && m_data[71:64] == 8'h0 && src < NM) begin
        checks++;
        dma_slow++;
        if (m_data[111:108] != 4'(src)) begin failures++; $display("slow pkt in wrong ring %0d", src); end
      end
      if (m_data[127:112] == FS_MAGIC && m_data[63:0] == 64'h0 && src >= NM) begin
        checks++;
        dma_fast++;
        if (m_data[109:106] != 4'(src - NM)) begin failures++; $display("fast pkt in wrong ring %0d", src); end
      end
    end
    m_ready <= !m_hold && ($urandom_range(0, 3) != 0);
  end
  // 100G side
  bit q_hold = 0, q_tag = 1;
  int q_src = 0;
  always @(posedge clk) if (!rst) begin
    if (q_valid && !q_ready) q_stall++;
    if (q_valid && q_ready) begin
      if (q_tag) begin
        checks++;
        if (q_data[127:112] != Q_MAGIC) begin failures++; $display("bad 100G tag %h", q_data[127:96]); end
        q_src = int'(q_data[111:104]);
        q_tag = 0;
      end else begin
        if (q_data[127:112] == PKT_MAGIC && q_src < NM) begin
          q_slow++;
          checks++;
          if (q_data[111:108] != 4'(q_src)) begin failures++; $display("100G slow src %0d", q_src); end
        end
        if (q_data[127:112] == FS_MAGIC && q_src >= NM && q_data[63:0] == 64'h0) begin
          q_fast++;
          checks++;
          if (q_data[109:106] != 4'(q_src - NM)) begin failures++; $display("100G fast src %0d", q_src); end
        end
        if (q_last) q_tag = 1;
      end
    end
    q_ready <= !q_hold && ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) if (!rst) begin
    if (fs_overflow[0]) fs_ovf++;
    if (mux_overflow[1]) mux_ovf++;
    if (fb_active[0]) fb_on++;
  end

  task automatic wr(int m, logic [3:0] r, logic [11:0] a, logic [63:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {2'(m), r, a}; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; timestamp = 0;
    for (int m = 0; m < NM; m++) begin
      adc_valid[m] = 0; ph[m] = 0.0;
      for (int k = 0; k < NSUB; k++) adc_data[m][k] = 0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    // tune a few channels on every module, one tone per module
    for (int m = 0; m < NM; m++) begin
      wr(m, R_CH_FREQ, 12'h000, 64'(m + 3) << 32);
      wr(m, R_CH_FREQ, 12'h101, 64'(m + 3) << 32);
      wr(m, R_CH_AMPPH, 12'h000, 64'h1000);
      adc_valid[m] = 1;
    end
    wr(1, R_GLOBAL, G_SLOW_DST, 64'h1);
    wr(0, R_FB_GAIN, 12'h000, 64'h0000_0040_0000_0040);
    wr(0, R_FB_MODE, 12'h000, 64'd1);
    checks++;
    if (cic2_log2r[3] != 3'd4) failures++;
    wr(3, R_GLOBAL, G_CIC2_LOG, 64'd5);
    if (cic2_log2r[3] == 3'd5 && cic2_log2r[2] == 3'd4) rate_sw++;
    // fast capture to 100G from module 2, to DMA from module 3
    wr(2, R_GLOBAL, G_FS_CTRL, {32'd4, 28'h0, 4'b0101});
    wr(2, R_GLOBAL, G_FS_ARM, 64'h1);
    wr(3, R_GLOBAL, G_FS_CTRL, {32'd3, 28'h0, 4'b0001});
    wr(3, R_GLOBAL, G_FS_ARM, 64'h1);
    repeat (3000) @(negedge clk);
    // mux overflow on module 1: channel mode, every channel of lanes 0 and 1
    for (int l = 0; l < 2; l++)
      for (int t = 0; t < 256; t++) wr(1, R_MUX_SEL, {4'(l), 8'(t)}, 64'h1);
    wr(1, R_GLOBAL, G_FS_CTRL, {32'd2, 28'h0, 4'b0110});
    wr(1, R_GLOBAL, G_FS_ARM, 64'h1);
    repeat (2000) @(negedge clk);
    // fast-streamer overflow on module 0: continuous, 100G held off
    q_hold = 1;
    wr(0, R_GLOBAL, G_FS_CTRL, {32'd0, 28'h0, 4'b1101});
    wr(0, R_GLOBAL, G_FS_ARM, 64'h1);
    repeat (3000) @(negedge clk);
    wr(0, R_GLOBAL, G_FS_CTRL, 64'h0);
    q_hold = 0;
    // wait for the first slow packets (CIC1 /64 then CIC2 /16: 1024 frames)
    wait (dma_slow >= 3 * 2 && q_slow >= 1);
    repeat (2000) @(negedge clk);
    $display("dma_slow=%0d dma_stall=%0d dma_fast=%0d q_fast=%0d q_slow=%0d q_stall=%0d",
             dma_slow, dma_stall, dma_fast, q_fast, q_slow, q_stall);
    $display("fs_ovf=%0d mux_ovf=%0d rate_sw=%0d fb_on=%0d q_frames=%0d drops=%0d",
             fs_ovf, mux_ovf, rate_sw, fb_on, q_frames, pkt_drops[0]);
    checks += 12;
    if (dma_slow == 0) failures++;
    if (dma_stall == 0) failures++;
    if (dma_fast != 3) begin failures++; $display("dma_fast %0d", dma_fast); end
    if (q_fast < 4) failures++;
    if (q_slow == 0) failures++;
    if (q_stall == 0) failures++;
    if (fs_ovf == 0) failures++;
    if (mux_ovf == 0) failures++;
    if (rate_sw == 0) failures++;
    if (fb_on == 0) failures++;
    if (dma_pkts[0] == 0 || dma_pkts[NM + 3] != 32'd3) begin failures++; $display("dma_pkts"); end
    if (q_frames == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
