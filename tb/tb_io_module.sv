// tb_io_module: one I/O module driven by a synthetic RF-ADC tone.
//
// The ADC carries a real tone at 4.25 PFB bins above DC (the DDC NCO is left
// at zero). Channel 0 of lane 0 is tuned to the same frequency, 4 bins plus
// a quarter-bin residual, so after the PFB and the per-channel DDS it should
// sit at DC: a large, constant I,Q. Channel 5 of lane 0 is tuned to the
// centre of bin 4, so it sees the tone rotating by a quarter turn per frame. Channel 9, tuned to bin 100, sees almost
// nothing. These native-rate channel samples are read through the channel
// mux and the fast streamer in channel mode. The test also checks that a
// channel amplitude produces DAC output, that enabling feedback on a channel
// raises fb_active, that an ADC-mode fast capture produces its header and
// data, and that the first slow-path packet of lane 0 arrives with its
// header and with channel 0 far above channel 9.
// The chain follows the published block diagram; tone levels and thresholds
// are this testbench's choice.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_io_module;
  import crs_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic         cfg_we;
  logic [15:0]  cfg_addr;
  logic [63:0]  cfg_wdata;
  logic [63:0]  timestamp;
  logic         adc_valid, dac_valid;
  logic signed [ADC_W-1:0] adc_data [NSUB], dac_data [NSUB];
  logic         slow_valid, slow_ready, slow_last, slow_dest;
  logic [127:0] slow_data, fast_data;
  logic         fast_valid, fast_ready, fast_last, fast_dest;
  logic         mux_overflow, fs_overflow, fb_active;
  logic [15:0]  pkt_drops;
  logic [2:0]   cic2_log2r;
  int checks = 0, failures = 0;
  real ph = 0.0;
  localparam real PI = 3.14159265358979;
  localparam real FT = 4.25 / 2048.0;      // tone, cycles per ADC sample
  io_module #(.MOD(1)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) begin
    timestamp <= timestamp + 1;
    for (int k = 0; k < NSUB; k++) begin
      adc_data[k] <= ADC_W'($rtoi($floor(3000.0 * $cos(2.0 * PI * ph) + 0.5)));
      ph = ph + FT;
      if (ph > 1.0) ph = ph - 1.0;
    end
  end
  task automatic wr(logic [3:0] r, logic [11:0] a, logic [63:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {r, a}; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask
  function automatic real mag(logic [23:0] i, logic [23:0] q);
    real a, b;
    a = real'($signed(i)); b = real'($signed(q));
    return $sqrt(a * a + b * b);
  endfunction

  function automatic real mag32(logic [31:0] i, logic [31:0] q);
    real a, b;
    a = real'($signed(i)); b = real'($signed(q));
    return $sqrt(a * a + b * b);
  endfunction

  // channel samples from fast packets in channel mode
  real m0 [$], m5 [$], m9 [$], p0 [$], p5 [$];
  int fwords = 0, fheads = 0;
  always @(posedge clk) if (!rst && fast_valid && fast_ready) begin
    if (fast_data[127:112] == FS_MAGIC && fast_data[63:0] == 64'h0) fheads++;
    else begin
      fwords++;
      for (int h = 0; h < 2; h++) begin
        logic [63:0] s;
        s = fast_data[64*h +: 64];
        if (s[57:48] == 10'd0) begin
          m0.push_back(mag(s[23:0], s[47:24]));
          p0.push_back($atan2(real'($signed(s[47:24])), real'($signed(s[23:0]))));
        end
        if (s[57:48] == 10'd5) begin
          m5.push_back(mag(s[23:0], s[47:24]));
          p5.push_back($atan2(real'($signed(s[47:24])), real'($signed(s[23:0]))));
        end
        if (s[57:48] == 10'd9) m9.push_back(mag(s[23:0], s[47:24]));
      end
    end
  end
  // slow packets: header then 128 words of two channels
  int sw = -1, spk = 0, fbn = 0;
  always @(posedge clk) if (fb_active) fbn++;
  real s0 = 0.0, s9 = 0.0;
  always @(posedge clk) if (!rst && slow_valid && slow_ready) begin
    if (sw < 0) begin
      checks++;
      if (slow_data[127:112] != PKT_MAGIC || slow_data[111:108] != 4'd1) begin
        failures++; $display("slow header %h", slow_data[127:96]);
      end
      sw = 0;
    end else begin
      if (sw == 0) s0 = mag32(slow_data[31:0], slow_data[63:32]);
      if (sw == 4) s9 = mag32(slow_data[95:64], slow_data[127:96]);
      sw++;
      if (slow_last) begin sw = -1; spk++; end
    end
  end

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; timestamp = 0; adc_valid = 0;
    slow_ready = 1; fast_ready = 1;
    for (int k = 0; k < NSUB; k++) adc_data[k] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    wr(R_CH_FREQ,  12'h000, (64'd4 << 32) + (64'd1 << 30));
    wr(R_CH_FREQ,  12'h005, (64'd4 << 32));
    wr(R_CH_FREQ,  12'h009, (64'd100 << 32));
    wr(R_MUX_SEL,  12'h000, 64'h1);
    wr(R_MUX_SEL,  12'h005, 64'h1);
    wr(R_MUX_SEL,  12'h009, 64'h1);
    wr(R_CH_AMPPH, 12'h000, 64'h0000_2000);
    adc_valid = 1;
    repeat (2000) @(negedge clk);
    checks++;
    begin
      bit any;
      any = 0;
      repeat (600) begin
        @(negedge clk);
        for (int k = 0; k < NSUB; k++) if (dac_valid && dac_data[k] != 0) any = 1;
      end
      if (!any) begin failures++; $display("no DAC output"); end
    end
    // channel-mode capture of 20 packets
    wr(R_GLOBAL, G_FS_CTRL, {32'd20, 28'h0, 4'b0010});
    wr(R_GLOBAL, G_FS_ARM, 64'h1);
    wait (fheads == 20 && !dut.u_fs.active);
    repeat (50) @(negedge clk);
    checks += 5;
    if (m0.size() < 40 || m5.size() < 40 || m9.size() < 40) begin
      failures++; $display("samples %0d %0d %0d", m0.size(), m5.size(), m9.size());
    end else begin
      real lo, hi, dp0, dp5, avg9;
      lo = 1e30; hi = 0; dp0 = 0; dp5 = 0; avg9 = 0;
      for (int n = 0; n < m0.size(); n++) begin
        if (m0[n] < lo) lo = m0[n];
        if (m0[n] > hi) hi = m0[n];
      end
      for (int n = 1; n < p0.size(); n++) begin
        real d;
        d = p0[n] - p0[n-1];
        if (d > PI) d = d - 2.0 * PI;
        if (d < -PI) d = d + 2.0 * PI;
        dp0 = dp0 + (d < 0 ? -d : d);
      end
      dp0 = dp0 / real'(p0.size() - 1);
      for (int n = 1; n < p5.size(); n++) begin
        real d;
        d = p5[n] - p5[n-1];
        if (d > PI) d = d - 2.0 * PI;
        if (d < -PI) d = d + 2.0 * PI;
        dp5 = dp5 + (d < 0 ? -d : d);
      end
      dp5 = dp5 / real'(p5.size() - 1);
      foreach (m9[n]) avg9 = avg9 + m9[n] / real'(m9.size());
      $display("ch0 |x| %0.1f..%0.1f dphase %0.4f; ch5 dphase %0.4f; ch9 |x| %0.1f", lo, hi, dp0, dp5, avg9);
      if (lo < 1000.0) begin failures++; $display("ch0 too small"); end
      if (hi - lo > 0.02 * hi) begin failures++; $display("ch0 not constant"); end
      if (dp0 > 0.01) begin failures++; $display("ch0 rotates"); end
      if (dp5 < 1.0 || dp5 > 2.1) begin failures++; $display("ch5 phase step %f", dp5); end
      if (avg9 > 0.01 * lo) begin failures++; $display("ch9 leakage"); end
    end
    // ADC-mode capture of 2 packets
    fheads = 0; fwords = 0;
    wr(R_GLOBAL, G_FS_CTRL, {32'd2, 28'h0, 4'b0001});
    wr(R_GLOBAL, G_FS_ARM, 64'h1);
    wait (fheads == 2 && !dut.u_fs.active);
    repeat (50) @(negedge clk);
    checks++;
    if (fwords != 128) begin failures++; $display("adc words %0d", fwords); end
    // feedback on channel 0
    checks++;
    if (fbn != 0) begin failures++; $display("fb active early"); end
    wr(R_FB_GAIN, 12'h000, 64'h0000_0100_0000_0100);
    wr(R_FB_MODE, 12'h000, 64'd1);
    repeat (600) @(negedge clk);
    checks++;
    // one channel of 1024 is under feedback: active one clock per frame
    if (fbn < 2 || fbn > 3) begin failures++; $display("fb active %0d clocks", fbn); end
    wr(R_FB_MODE, 12'h000, 64'd0);
    // first slow packet of lane 0
    wait (spk >= 1);
    checks++;
    $display("slow ch0 %0.1f ch9 %0.1f", s0, s9);
    if (s0 < 1000.0 || s9 > 0.01 * s0) begin failures++; $display("slow packet content"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
