// adc_ddc: digital down-converter of one RF-ADC, 5 GSPS real to 625 MSPS complex.
//
// Each clock brings NSUB = 8 real 14-bit ADC samples (x[0] oldest). A 32-bit
// NCO gives sample k the phase phi + k*inc; the sample is mixed with
// exp(-j*phase) (x*cos, -x*sin), and the eight products are summed: an
// 8-sample boxcar low-pass fused with the /8 decimation. The sum is halved,
// rounded and saturated to 16-bit (I,Q); a full-scale real tone at the NCO
// frequency gives about 2^14, leaving room for the image the boxcar passes. The published design gives the /8 rate, the NCO and the
// 16-bit (I,Q) output; the boxcar filter (the simplest low-pass that does
// the job) and the NCO width are this design's choice.
//
// Timing: o_* registered, one clock after adc_valid; phi advances by 8*inc
// per valid clock and resets to 0.
module adc_ddc
  import crs_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      adc_valid,
  input  logic signed [ADC_W-1:0]   adc_data [NSUB],
  input  logic [31:0]               nco_inc,
  output logic                      o_valid,
  output logic signed [BB_W-1:0]    o_i,
  output logic signed [BB_W-1:0]    o_q
);
  logic [31:0] phi;
  logic signed [TRIG_W-1:0] c [NSUB], s [NSUB];
  logic signed [63:0] ai, aq;

  for (genvar k = 0; k < NSUB; k++) begin : g_lut
    sincos_lut #(.PHASE_W(32)) u_lut (.phase(phi + 32'(k) * nco_inc), .cos_o(c[k]), .sin_o(s[k]));
  end

  always_comb begin
    ai = 64'sd32768;
    aq = 64'sd32768;
    for (int k = 0; k < int'(NSUB); k++) begin
      ai += 64'(adc_data[k]) * 64'(c[k]);
      aq -= 64'(adc_data[k]) * 64'(s[k]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      phi <= '0; o_valid <= 1'b0; o_i <= '0; o_q <= '0;
    end else begin
      o_valid <= adc_valid;
      if (adc_valid) begin
        phi <= phi + (nco_inc << 3);
        o_i <= BB_W'(sat(ai >>> 16, BB_W));
        o_q <= BB_W'(sat(aq >>> 16, BB_W));
      end
    end
  end
endmodule
