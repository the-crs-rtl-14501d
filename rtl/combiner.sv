// combiner: merges N packet streams into one, a whole packet at a time.
//
// When idle, the first input with valid data after the last granted one is
// chosen (round-robin) and held, from the clock its first word is offered,
// until its word with last is accepted. The
// chosen input's valid, data and last go straight through and the output's
// ready returns to that input only (no added latency, no buffering).
// o_sel tells which input the current word comes from. Round-robin at packet
// boundaries is this design's choice; the published design names the block.
// Used per I/O module (lanes) and inside the DMA master and 100G packetizer.
module combiner #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 128
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         i_valid [N],
  output logic         i_ready [N],
  input  logic [W-1:0] i_data  [N],
  input  logic         i_last  [N],
  output logic         o_valid,
  input  logic         o_ready,
  output logic [W-1:0] o_data,
  output logic         o_last,
  output logic [$clog2(N > 1 ? N : 2)-1:0] o_sel
);
  localparam int unsigned SW = $clog2(N > 1 ? N : 2);
  logic locked;
  logic [SW-1:0] cur, last_g, pick;
  logic any;

  always_comb begin
    any  = 1'b0;
    pick = last_g;
    for (int k = 1; k <= int'(N); k++) begin
      int c;
      c = (int'(last_g) + k) % int'(N);
      if (!any && i_valid[c]) begin
        any  = 1'b1;
        pick = SW'(c);
      end
    end
  end

  assign o_sel   = locked ? cur : pick;
  assign o_valid = locked ? i_valid[cur] : any;
  assign o_data  = i_data[o_sel];
  assign o_last  = i_last[o_sel];
  always_comb for (int k = 0; k < int'(N); k++) i_ready[k] = o_ready && o_valid && (o_sel == SW'(k));

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0; cur <= '0; last_g <= SW'(N - 1);
    end else if (o_valid && o_ready && o_last) begin
      locked <= 1'b0;
      last_g <= o_sel;
    end else if (o_valid) begin
      // the grant is held from the first offered word, so the output does
      // not change while it waits for ready
      locked <= 1'b1;
      cur    <= o_sel;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
    (o_valid && !o_ready) |=> o_valid && $stable(o_sel));
endmodule
