// channel_mux: picks the channels that go to the fast streamer.
//
// Each channel has a select bit (control region R_MUX_SEL). Selected samples
// of the LANES lanes (native 2.44 MSPS demodulated I,Q) are pushed into one
// FIFO per lane, and the FIFOs are drained round-robin, one sample per
// clock, into a single stream tagged with the 10-bit channel number
// {lane, chan}. The lanes together offer up to LANES samples per clock, the
// output takes one, so on average at most 256 selected channels per module
// fit; the published design streams up to 512 channels over four modules
// (128 each). A push into a full FIFO is lost and sets the sticky overflow.
// Per-lane FIFOs and round-robin are this design's choice.
module channel_mux
  import crs_pkg::*;
#(
  parameter int unsigned LANES      = NLANES,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [63:0] cfg_wdata,
  input  lane_t       in [LANES],
  output logic        o_valid,
  output logic [9:0]  o_chan,
  output logic signed [CH_W-1:0] o_i,
  output logic signed [CH_W-1:0] o_q,
  output logic        overflow
);
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int unsigned FW = 8 + 2*CH_W;
  logic sel [LANES][256];
  logic [FW-1:0] dout [LANES];
  logic empty [LANES], full [LANES], push [LANES], pop [LANES];
  logic [LW-1:0] last_g, pick;
  logic any;

  for (genvar l = 0; l < LANES; l++) begin : g_f
    assign push[l] = in[l].valid && sel[l][in[l].chan];
    stream_fifo #(.W(FW), .DEPTH(FIFO_DEPTH)) u_f (
      .clk, .rst, .push(push[l]), .din({in[l].chan, in[l].q[CH_W-1:0], in[l].i[CH_W-1:0]}),
      .pop(pop[l]), .dout(dout[l]), .empty(empty[l]), .full(full[l]));
  end

  always_comb begin
    any  = 1'b0;
    pick = last_g;
    for (int k = 1; k <= int'(LANES); k++) begin
      int c;
      c = (int'(last_g) + k) % int'(LANES);
      if (!any && !empty[c]) begin
        any  = 1'b1;
        pick = LW'(c);
      end
    end
    for (int l = 0; l < int'(LANES); l++) pop[l] = any && (pick == LW'(l));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int l = 0; l < int'(LANES); l++)
        for (int t = 0; t < 256; t++) sel[l][t] <= 1'b0;
      last_g <= LW'(LANES - 1);
      o_valid <= 1'b0; o_chan <= '0; o_i <= '0; o_q <= '0; overflow <= 1'b0;
    end else begin
      if (cfg_we && cfg_addr[15:12] == R_MUX_SEL && {2'b0, cfg_addr[11:8]} < 6'(LANES))
        sel[LW'(cfg_addr[8 +: LW])][cfg_addr[7:0]] <= cfg_wdata[0];
      for (int l = 0; l < int'(LANES); l++) if (push[l] && full[l]) overflow <= 1'b1;
      o_valid <= any;
      if (any) begin
        last_g <= pick;
        o_chan <= {2'(pick), dout[pick][FW-1 -: 8]};
        o_q    <= dout[pick][2*CH_W-1 -: CH_W];
        o_i    <= dout[pick][CH_W-1:0];
      end
    end
  end
endmodule
