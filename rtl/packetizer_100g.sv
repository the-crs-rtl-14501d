// packetizer_100g: frames packet streams for the optional 100 GbE link.
//
// NSRC packet streams (slow-path combiner outputs and fast streamers that are
// directed to 100G) are arbitrated a whole packet at a time and each packet
// is sent behind a tag word {Q_MAGIC, src[7:0], 8'h0, frame[31:0], 64'h0},
// frame counting the packets sent. The output is a 128-bit valid/ready
// stream for the 100G MAC (not part of this design). Tag format is this
// design's choice; the published design names the block only.
// Timing: the tag word is presented, combinationally, while the granted
// source's first word waits. The words of the packet then pass with no
// added latency. The tag format is this design's own; the published design
// names the block.
module packetizer_100g
  import crs_pkg::*;
#(
  parameter int unsigned NSRC = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         s_valid [NSRC],
  output logic         s_ready [NSRC],
  input  logic [127:0] s_data  [NSRC],
  input  logic         s_last  [NSRC],
  output logic         q_valid,
  input  logic         q_ready,
  output logic [127:0] q_data,
  output logic         q_last,
  output logic [31:0]  frames
);
  localparam int unsigned SW = $clog2(NSRC > 1 ? NSRC : 2);
  logic [SW-1:0] sel;
  logic c_valid, c_ready, c_last;
  logic [127:0] c_data;
  logic in_pkt;   // tag sent, packet body flowing

  combiner #(.N(NSRC), .W(128)) u_arb (
    .clk, .rst, .i_valid(s_valid), .i_ready(s_ready), .i_data(s_data), .i_last(s_last),
    .o_valid(c_valid), .o_ready(c_ready), .o_data(c_data), .o_last(c_last), .o_sel(sel));

  assign q_valid = c_valid;
  assign q_data  = in_pkt ? c_data : {Q_MAGIC, 8'(sel), 8'h00, frames, 64'h0};
  assign q_last  = in_pkt && c_last;
  assign c_ready = in_pkt && q_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt <= 1'b0; frames <= '0;
    end else if (q_valid && q_ready) begin
      if (!in_pkt) in_pkt <= 1'b1;
      else if (c_last) begin
        in_pkt <= 1'b0;
        frames <= frames + 1'b1;
      end
    end
  end
endmodule
