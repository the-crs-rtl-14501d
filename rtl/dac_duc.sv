// dac_duc: digital up-converter of one RF-DAC, 625 MSPS complex to 5 GSPS real.
//
// Each complex 16-bit input sample is held for NSUB = 8 output samples
// (zero-order-hold interpolation, the simplest interpolator) and mixed up by
// a 32-bit NCO: output k = Re{x * exp(j(phi + k*inc))} = I cos - Q sin,
// rounded to 16 bits and then saturated to the 14-bit DAC word (>>> 2).
// The published design gives the x8 rate, the NCO and the 14-bit DAC; the
// hold interpolator and the NCO width are this design's choice.
//
// Timing: dac_* registered, one clock after i_valid; phi advances by 8*inc
// per valid clock and resets to 0.
module dac_duc
  import crs_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      i_valid,
  input  logic signed [BB_W-1:0]    i_i,
  input  logic signed [BB_W-1:0]    i_q,
  input  logic [31:0]               nco_inc,
  output logic                      dac_valid,
  output logic signed [ADC_W-1:0]   dac_data [NSUB]
);
  logic [31:0] phi;
  logic signed [TRIG_W-1:0] c [NSUB], s [NSUB];

  for (genvar k = 0; k < NSUB; k++) begin : g_lut
    logic signed [63:0] y;
    sincos_lut #(.PHASE_W(32)) u_lut (.phase(phi + 32'(k) * nco_inc), .cos_o(c[k]), .sin_o(s[k]));
    assign y = (64'(i_i) * 64'(c[k]) - 64'(i_q) * 64'(s[k]) + 64'sd65536) >>> 17;
    always_ff @(posedge clk) begin
      if (rst) dac_data[k] <= '0;
      else if (i_valid) dac_data[k] <= ADC_W'(sat(y, ADC_W));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      phi <= '0; dac_valid <= 1'b0;
    end else begin
      dac_valid <= i_valid;
      if (i_valid) phi <= phi + (nco_inc << 3);
    end
  end
endmodule
