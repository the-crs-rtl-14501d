// cic_decimator: time-multiplexed CIC decimator for the 256 channels of a lane.
//
// Serves both slow-path filters of the published design: CIC1 (fixed /64,
// 2.44 MSPS to 38 kSPS, 24-bit out) and CIC2 (/2^N, N = 4, 5 or 6, to
// 2.384, 1.192 or 0.596 kSPS, 32-bit out), selected by the log2r port.
// Per channel it keeps ORDER integrators and ORDER comb delays (differential
// delay 1) in memories. All channels decimate on the same frame: a frame
// counter advances on in.last and every 2^log2r-th frame the comb section
// runs and each channel's output leaves with its sample. The gain 2^(ORDER*
// log2r) is removed by a right shift, keeping OUT_W-IN_W extra fraction bits
// (unity gain for CIC1, x256 for CIC2). ORDER = 3 and the scaling are this
// design's choice; the published design gives the rates and widths only.
//
// Timing: out is registered, one clock after the input sample of an output
// frame; out.valid is high only in output frames. Integrators wrap (modulo
// arithmetic, exact for a CIC of this width).
module cic_decimator
  import crs_pkg::*;
#(
  parameter int unsigned ORDER     = 3,
  parameter int unsigned LOG2R_MAX = 6,
  parameter int unsigned IN_W      = 24,
  parameter int unsigned OUT_W     = 24
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [2:0]  log2r,
  input  lane_t       in,
  output lane_t       out
);
  localparam int unsigned AW = IN_W + ORDER * LOG2R_MAX;
  typedef logic signed [AW-1:0] acc_t;
  acc_t ii [ORDER][256], iq [ORDER][256];
  acc_t di [ORDER][256], dq [ORDER][256];
  logic [LOG2R_MAX-1:0] fc;
  logic [LOG2R_MAX-1:0] rmask;
  logic dump;
  acc_t si [ORDER], sq [ORDER], ci [ORDER+1], cq [ORDER+1];
  int   sh;
  logic [7:0] t;

  assign t     = in.chan;
  assign rmask = LOG2R_MAX'((1 << log2r) - 1);
  assign dump  = (fc & rmask) == rmask;
  assign sh    = int'(ORDER) * int'(log2r) - (int'(OUT_W) - int'(IN_W));

  always_comb begin
    acc_t pi, pq;
    pi = AW'(signed'(in.i[IN_W-1:0]));
    pq = AW'(signed'(in.q[IN_W-1:0]));
    for (int k = 0; k < int'(ORDER); k++) begin
      si[k] = ii[k][t] + pi;
      sq[k] = iq[k][t] + pq;
      pi = si[k];
      pq = sq[k];
    end
    ci[0] = si[ORDER-1];
    cq[0] = sq[ORDER-1];
    for (int k = 0; k < int'(ORDER); k++) begin
      ci[k+1] = ci[k] - di[k][t];
      cq[k+1] = cq[k] - dq[k][t];
    end
  end

  function automatic logic signed [31:0] scale(input acc_t x, input int s);
    logic signed [63:0] y;
    y = (s >= 0) ? (64'(x) >>> s) : (64'(x) <<< (-s));
    return 32'(sat(y, OUT_W));
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < int'(ORDER); k++)
        for (int c = 0; c < 256; c++) begin
          ii[k][c] <= '0; iq[k][c] <= '0; di[k][c] <= '0; dq[k][c] <= '0;
        end
      fc  <= '0;
      out <= '0;
    end else begin
      out.valid <= in.valid && dump;
      out.last  <= in.last;
      out.chan  <= in.chan;
      out.bin   <= in.bin;
      out.i     <= scale(ci[ORDER], sh);
      out.q     <= scale(cq[ORDER], sh);
      if (in.valid) begin
        for (int k = 0; k < int'(ORDER); k++) begin
          ii[k][t] <= si[k];
          iq[k][t] <= sq[k];
        end
        if (dump)
          for (int k = 0; k < int'(ORDER); k++) begin
            di[k][t] <= ci[k];
            dq[k][t] <= cq[k];
          end
        if (in.last) fc <= fc + 1'b1;
      end
    end
  end
endmodule
