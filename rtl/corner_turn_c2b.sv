// corner_turn_c2b: corner turn from channels back to PFB bins.
//
// Every synthesized channel sample is added into the accumulator of the bin
// it belongs to (in.bin), so channels sharing a bin sum. Each lane has its
// own ping-pong bank of 256 complex 32-bit accumulators, so all lanes add in
// the same clock. When lane 0 delivers the last channel of a frame the banks
// swap and the finished frame is read out over 256 clocks in natural bin
// order, the lanes' banks summed and saturated to 24 bits, each entry cleared
// as it is read. Bank structure and widths are this design's choice.
//
// Timing: the first bin of a frame leaves two clocks after the last channel
// sample; o_last marks bin 255. Lanes must run in lockstep (they do: all are
// fed by the same bin-to-channel corner turn).
module corner_turn_c2b
  import crs_pkg::*;
#(
  parameter int unsigned LANES = NLANES
) (
  input  logic               clk,
  input  logic               rst,
  input  lane_t              in [LANES],
  output logic               o_valid,
  output logic [7:0]         o_bin,
  output logic               o_last,
  output logic signed [CH_W-1:0] o_i,
  output logic signed [CH_W-1:0] o_q
);
  logic signed [31:0] ai [LANES][2][256];
  logic signed [31:0] aq [LANES][2][256];
  logic wsel, rd_act;
  logic [7:0] rd_k;
  logic signed [63:0] si, sq;

  always_comb begin
    si = '0;
    sq = '0;
    for (int l = 0; l < int'(LANES); l++) begin
      si += 64'(ai[l][~wsel][rd_k]);
      sq += 64'(aq[l][~wsel][rd_k]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int l = 0; l < int'(LANES); l++)
        for (int b = 0; b < 2; b++)
          for (int k = 0; k < 256; k++) begin
            ai[l][b][k] <= '0;
            aq[l][b][k] <= '0;
          end
      wsel <= 1'b0; rd_act <= 1'b0; rd_k <= '0;
      o_valid <= 1'b0; o_last <= 1'b0; o_bin <= '0; o_i <= '0; o_q <= '0;
    end else begin
      for (int l = 0; l < int'(LANES); l++)
        if (in[l].valid) begin
          ai[l][wsel][in[l].bin] <= 32'(sat(64'(ai[l][wsel][in[l].bin]) + 64'(in[l].i), 32));
          aq[l][wsel][in[l].bin] <= 32'(sat(64'(aq[l][wsel][in[l].bin]) + 64'(in[l].q), 32));
        end
      if (rd_act)
        for (int l = 0; l < int'(LANES); l++) begin
          ai[l][~wsel][rd_k] <= '0;
          aq[l][~wsel][rd_k] <= '0;
        end
      o_valid <= rd_act;
      o_last  <= rd_act && rd_k == 8'hFF;
      o_bin   <= rd_k;
      o_i     <= CH_W'(sat(si, CH_W));
      o_q     <= CH_W'(sat(sq, CH_W));
      if (in[0].valid && in[0].last) begin
        wsel <= ~wsel; rd_act <= 1'b1; rd_k <= '0;
      end else if (rd_act) begin
        rd_k <= rd_k + 1'b1;
        if (rd_k == 8'hFF) rd_act <= 1'b0;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (rst) (in[0].valid && in[0].last) |-> (!rd_act || rd_k == 8'hFF));
endmodule
