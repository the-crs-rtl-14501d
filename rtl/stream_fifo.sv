// stream_fifo: synchronous first-word-fall-through FIFO.
//
// DEPTH entries of W bits held in an array. dout shows the oldest entry
// whenever empty is low; pop removes it. A push when full and a pop when
// empty are ignored (callers flag the first as an overflow). Helper for the
// channel mux and the fast streamer.
// Timing: a push becomes visible on dout one clock later. Both pointers
// update at the clock edge. This is a generic helper, not a block of the
// published design.
module stream_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 64
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;
  assign empty = (wp == rp);
  assign full  = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign dout  = mem[rp[AW-1:0]];
  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0;
    end else begin
      if (push && !full) begin
        mem[wp[AW-1:0]] <= din;
        wp <= wp + 1'b1;
      end
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end
endmodule
