// packetizer: turns one decimated output frame of a lane into a packet.
//
// The CIC2 output of the lane's 256 channels (32-bit I and Q each) is packed
// two channels to a 128-bit word, {Q[2n+1], I[2n+1], Q[2n], I[2n]}, into a
// 128-word buffer. When channel 255 arrives the packet is sent: one header
// word {PKT_MAGIC, module, lane, 8'h0, seq[31:0], timestamp[63:0]} and the
// 128 data words, o_last on the final word, under valid/ready. A frame whose
// first channel arrives while the previous packet is still being sent is
// dropped and counted in drops. The packet layout is this design's choice;
// the published design names the block and sends its output by UDP.
//
// Timing: o_valid rises one clock after channel 255; 129 words take 129
// clocks without backpressure, well inside the >= 4,096 clocks per frame.
module packetizer
  import crs_pkg::*;
#(
  parameter int unsigned MOD  = 0,
  parameter int unsigned LANE = 0
) (
  input  logic         clk,
  input  logic         rst,
  input  lane_t        in,
  input  logic [63:0]  timestamp,
  output logic         o_valid,
  input  logic         o_ready,
  output logic [127:0] o_data,
  output logic         o_last,
  output logic [31:0]  seq,
  output logic [15:0]  drops
);
  logic [127:0] buf_q [128];
  logic [63:0]  lo;
  logic         busy, skip;
  logic [7:0]   widx;      // 0 = header, 1..128 = data
  logic [63:0]  ts;

  assign o_valid = busy;
  assign o_last  = busy && widx == 8'd128;
  assign o_data  = (widx == 8'd0) ? {PKT_MAGIC, 4'(MOD), 4'(LANE), 8'h00, seq, ts} : buf_q[7'(widx - 8'd1)];

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; skip <= 1'b0; widx <= '0; seq <= '0; drops <= '0; ts <= '0; lo <= '0;
    end else begin
      if (in.valid) begin
        if (in.chan == 8'd0) skip <= busy;
        if (in.chan == 8'd0 && busy) drops <= drops + 1'b1;
        if (!(in.chan == 8'd0 ? busy : skip)) begin
          if (!in.chan[0]) lo <= {in.q, in.i};
          else buf_q[in.chan[7:1]] <= {in.q, in.i, lo};
          if (in.chan == 8'hFF) begin
            busy <= 1'b1; widx <= '0; ts <= timestamp;
          end
        end
      end
      if (busy && o_ready) begin
        widx <= widx + 1'b1;
        if (widx == 8'd128) begin
          busy <= 1'b0;
          seq  <= seq + 1'b1;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst) (o_valid && !o_ready) |=> o_valid && $stable(o_data));
endmodule
