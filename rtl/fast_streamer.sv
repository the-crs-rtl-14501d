// fast_streamer: fast-path capture and streaming of raw or channel data.
//
// Two sources, chosen by the mode field of G_FS_CTRL (fs_mode_e):
//   FS_ADC  the 625 MSPS complex DDC output, four {Q16,I16} samples per word;
//   FS_PFB  the channels selected by the channel mux at 2.44 MSPS each, two
//           {6'b0, chan10, Q24, I24} samples per word.
// Data is cut into packets of one header word {FS_MAGIC, mode, module, 10'h0,
// seq[31:0], 64'h0} and PKT_WORDS data words (o_last on the last). A write
// to G_FS_ARM starts a capture of len packets (G_FS_CTRL[63:32]); with the
// continuous bit (G_FS_CTRL[3]) it streams until the mode is set to FS_IDLE,
// which ends the capture at the next packet boundary so that no packet is
// left without its last word. Mode and destination are taken when the
// capture is armed and travel with every FIFO word.
// o_dest (G_FS_CTRL[2]) tells the module whether the stream goes to the DMA
// master (0, discrete captures over 1 GbE) or to the 100G packetizer (1).
// Packets pass a FIFO. A packet is started only if the FIFO has room for all
// of it; otherwise the whole packet is skipped (its sequence number is still
// used, so the receiver sees the gap) and the sticky overflow bit is set. Formats and controls are this design's choice.
// Timing: a sample is packed in the clock it arrives. A finished word enters
// the FIFO at the next edge and can leave from the clock after that.
module fast_streamer
  import crs_pkg::*;
#(
  parameter int unsigned MOD       = 0,
  parameter int unsigned PKT_WORDS = 64,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         cfg_we,
  input  logic [15:0]  cfg_addr,
  input  logic [63:0]  cfg_wdata,
  input  logic         adc_valid,
  input  logic signed [BB_W-1:0] adc_i,
  input  logic signed [BB_W-1:0] adc_q,
  input  logic         ch_valid,
  input  logic [9:0]   ch_chan,
  input  logic signed [CH_W-1:0] ch_i,
  input  logic signed [CH_W-1:0] ch_q,
  output logic         o_valid,
  input  logic         o_ready,
  output logic [127:0] o_data,
  output logic         o_last,
  output logic         o_dest,
  output logic         overflow,
  output logic         active
);
  fs_mode_e    mode, run;      // configured mode, mode of the running capture
  logic        cont, dest, stop;
  logic [31:0] len, left, seq;
  logic [$clog2(PKT_WORDS+1)-1:0] wcnt;   // data words already in this packet
  logic [1:0]  slot;
  logic [127:0] word;
  logic        s_v, push;
  logic [63:0] s_d;
  logic [129:0] din, dout;    // {dest, last, data}
  logic        empty, full, w_last, hdr, skip, room;
  localparam int unsigned OW = $clog2(FIFO_DEPTH + 1);
  logic [OW-1:0] occ;   // FIFO entries in use
  logic          wend;  // this data word ends the packet
  assign wend = (32'(wcnt) == PKT_WORDS - 1);

  // sample to pack this clock
  always_comb begin
    s_v = 1'b0;
    s_d = '0;
    if (run == FS_ADC && adc_valid) begin
      s_v = 1'b1; s_d = {32'h0, adc_q, adc_i};
    end else if (run == FS_PFB && ch_valid) begin
      s_v = 1'b1; s_d = {6'h0, ch_chan, ch_q, ch_i};
    end
  end

  // header goes in when the first sample of a packet arrives, data word when full
  assign hdr    = active && s_v && wcnt == '0 && slot == 2'd0;
  assign w_last = (run == FS_ADC) ? (slot == 2'd3) : (slot == 2'd1);
  // a packet starts only if all its words fit, else it is skipped whole
  assign room   = 32'(occ) + PKT_WORDS + 1 <= FIFO_DEPTH;
  assign push   = active && s_v && (hdr ? room : (w_last && !skip));
  always_comb begin
    if (hdr && !w_last) din = {dest, 1'b0, FS_MAGIC, 2'(run), 4'(MOD), 10'h0, seq, 64'h0};
    else if (run == FS_ADC) din = {dest, wend, s_d[31:0], word[95:0]};
    else din = {dest, wend, s_d, word[63:0]};
  end

  stream_fifo #(.W(130), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .push, .din, .pop(o_valid && o_ready), .dout, .empty, .full);
  assign o_valid = !empty;
  assign o_data  = dout[127:0];
  assign o_last  = dout[128];
  assign o_dest  = dout[129];

  always_ff @(posedge clk) begin
    if (rst) occ <= '0;
    else occ <= occ + OW'(push && !full) - OW'(o_valid && o_ready);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mode <= FS_IDLE; run <= FS_IDLE; cont <= 1'b0; len <= '0; left <= '0; seq <= '0;
      dest <= 1'b0; stop <= 1'b0;
      wcnt <= '0; slot <= '0; word <= '0; active <= 1'b0; overflow <= 1'b0;
      skip <= 1'b0;
    end else begin
      if (cfg_we && cfg_addr[15:12] == R_GLOBAL && cfg_addr[11:0] == G_FS_CTRL) begin
        mode <= fs_mode_e'(cfg_wdata[1:0]); dest <= cfg_wdata[2]; cont <= cfg_wdata[3];
        len  <= cfg_wdata[63:32];
        // a running capture ends at its next packet boundary
        if (fs_mode_e'(cfg_wdata[1:0]) == FS_IDLE) stop <= 1'b1;
      end
      if (cfg_we && cfg_addr[15:12] == R_GLOBAL && cfg_addr[11:0] == G_FS_ARM) begin
        active <= (mode != FS_IDLE); run <= mode; stop <= 1'b0;
        left <= len; wcnt <= '0; slot <= '0;
      end else if (active && s_v) begin
        if (hdr) begin
          skip <= !room;
          if (!room) overflow <= 1'b1;
        end
        // header in the same clock as a data word cannot happen (slot 0 vs last slot)
        if (w_last) begin
          slot <= '0;
          word <= '0;
          if (wend) begin
            wcnt <= '0;
            seq  <= seq + 1'b1;
            if (!cont) left <= left - 1'b1;
            if (stop || (!cont && left == 32'd1)) begin
              active <= 1'b0; stop <= 1'b0;
            end
          end else wcnt <= wcnt + 1'b1;
        end else begin
          slot <= slot + 1'b1;
          if (mode == FS_ADC) word[slot*32 +: 32] <= s_d[31:0];
          else word[63:0] <= s_d;
        end
      end
    end
  end
endmodule
