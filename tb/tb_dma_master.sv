// tb_dma_master: three sources send packets of random length into the DMA
// master, whose memory side sees random backpressure. The memory model checks
// each write: its data must be the next word of the source named by the data,
// and its address must be that source's ring base plus its own running word
// count modulo the ring size (16 words here so that rings wrap), in bytes.
// At the end the per-source write pointers and packet counters are compared
// with the counts kept by the model.
// Ring addressing is this design's own; the published design only shows the
// DMA master feeding the memory controller.
// Timing: a 2-unit clock; stimulus changes away from the active clock edge
// and a watchdog ends a hung run with a failure.
module tb_dma_master;
  localparam int N = 3, NPK = 30, RL = 4;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic         s_valid [N], s_ready [N], s_last [N];
  logic [127:0] s_data [N];
  logic         m_valid, m_ready;
  logic [31:0]  m_addr, wr_ptr [N], pkts [N];
  logic [127:0] m_data;
  int checks = 0, failures = 0;
  int plen [N][NPK];
  int spk [N], sw [N], rpk [N], rw [N], nw [N];
  int done_pk = 0;
  dma_master #(.NSRC(N), .RING_LOG2(RL)) dut (.*);
  function automatic logic [127:0] wd(int s, int p, int w);
    return {4'(s), 12'(p), 8'(w), 8'(plen[s][p]), 96'h0123_4567_89ab_cdef_5555_aaaa};
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
      if (m_valid && m_ready) begin
        int s;
        logic [31:0] ea;
        s = int'(m_data[127:124]);
        ea = 32'(((s << RL) + (nw[s] % (1 << RL))) << 4);
        checks++;
        if (s >= N || m_data != wd(s, rpk[s], rw[s]) || m_addr != ea) begin
          failures++;
          if (failures < 6) $display("bad write %h @%h exp @%h", m_data[127:96], m_addr, ea);
        end
        nw[s]++;
        if (rw[s] == plen[s][rpk[s]] - 1) begin rpk[s]++; rw[s] = 0; done_pk++; end
        else rw[s]++;
      end
      m_ready <= ($urandom_range(0, 3) != 0);
    end
  end
  initial begin
    for (int s = 0; s < N; s++) begin
      s_valid[s] = 0; s_last[s] = 0; s_data[s] = 0; spk[s] = 0; sw[s] = 0; rpk[s] = 0; rw[s] = 0; nw[s] = 0;
      for (int p = 0; p < NPK; p++) plen[s][p] = $urandom_range(1, 9);
    end
    m_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    wait (done_pk == N * NPK);
    repeat (5) @(negedge clk);
    for (int s = 0; s < N; s++) begin
      checks += 2;
      if (wr_ptr[s] != 32'(nw[s] % (1 << RL))) begin failures++; $display("ptr %0d %0d", s, wr_ptr[s]); end
      if (pkts[s] != 32'(NPK)) begin failures++; $display("pkts %0d %0d", s, pkts[s]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
