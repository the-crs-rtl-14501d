// corner_turn_b2c: corner turn from PFB bins to channels.
//
// A PFB frame (256 bins, arriving in FFT order, one per clock) is written
// into one half of a ping-pong buffer at its true bin address. When the
// frame's last bin arrives the halves swap and the completed frame is read
// out over the next 256 clocks on LANES lanes at once: at read step t, lane l
// delivers channel l*256+t with the sample of the bin that channel's
// frequency falls in. Several channels may read the same bin. Each lane has
// its own copy of the buffer so that all lanes read in the same clock.
//
// A channel's bin is taken from its 40-bit frequency word F (control region
// R_CH_FREQ, F in units of 625 MHz/2^40): bin = (F + 2^31) >> 32, i.e. the
// top 8 bits rounded; the low 32 bits are the residual the DDS removes.
// This encoding, the lane split and the buffering are this design's choice;
// the published block diagram gives the block's name and place only.
//
// Timing: out[l] is registered; the first channel of a frame leaves two
// clocks after the frame's last bin arrives. Needs >= 256 clocks per frame.
module corner_turn_b2c
  import crs_pkg::*;
#(
  parameter int unsigned LANES = NLANES
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               cfg_we,
  input  logic [15:0]        cfg_addr,
  input  logic [63:0]        cfg_wdata,
  input  logic               i_valid,
  input  logic [7:0]         i_bin,
  input  logic               i_last,
  input  logic signed [CH_W-1:0] i_i,
  input  logic signed [CH_W-1:0] i_q,
  output lane_t              out [LANES]
);
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;
  logic [7:0] binsel [LANES][256];
  logic signed [CH_W-1:0] bi [LANES][2][256];
  logic signed [CH_W-1:0] bq [LANES][2][256];
  logic wsel, rd_act;
  logic [7:0] rd_t;
  logic [39:0] f;
  logic [LW-1:0] cl;

  assign f  = cfg_wdata[39:0];
  assign cl = LW'(cfg_addr[8 +: LW]);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int l = 0; l < int'(LANES); l++)
        for (int t = 0; t < 256; t++) binsel[l][t] <= '0;
    end else if (cfg_we && cfg_addr[15:12] == R_CH_FREQ && {2'b0, cfg_addr[11:8]} < 6'(LANES)) begin
      binsel[cl][cfg_addr[7:0]] <= 8'((f + 40'h0080000000) >> 32);
    end
  end

  always_ff @(posedge clk) begin
    if (i_valid)
      for (int l = 0; l < int'(LANES); l++) begin
        bi[l][wsel][i_bin] <= i_i;
        bq[l][wsel][i_bin] <= i_q;
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wsel   <= 1'b0;
      rd_act <= 1'b0;
      rd_t   <= '0;
      for (int l = 0; l < int'(LANES); l++) out[l] <= '0;
    end else begin
      if (i_valid && i_last) begin
        wsel   <= ~wsel;
        rd_act <= 1'b1;
        rd_t   <= '0;
      end else if (rd_act) begin
        rd_t <= rd_t + 1'b1;
        if (rd_t == 8'hFF) rd_act <= 1'b0;
      end
      for (int l = 0; l < int'(LANES); l++) begin
        out[l].valid <= rd_act;
        out[l].last  <= rd_act && (rd_t == 8'hFF);
        out[l].chan  <= rd_t;
        out[l].bin   <= binsel[l][rd_t];
        out[l].i     <= 32'(bi[l][~wsel][binsel[l][rd_t]]);
        out[l].q     <= 32'(bq[l][~wsel][binsel[l][rd_t]]);
      end
    end
  end

  // A new frame may only complete once the previous one has been read out.
  a_no_overrun: assert property (@(posedge clk) disable iff (rst) (i_valid && i_last) |-> (!rd_act || rd_t == 8'hFF));
endmodule
