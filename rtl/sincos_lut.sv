// sincos_lut: phase to (cos, sin) look-up.
//
// The top LUT_BITS bits of a PHASE_W-bit phase address a 2^LUT_BITS-entry
// table of Q15 cosine and sine values that is computed at elaboration (the
// table formula is cos/sin(2*pi*k/2^LUT_BITS), rounded). The look-up is
// combinational; callers register around it. Used by every NCO and DDS in
// the design. Phase truncation is this design's choice; the table size sets
// the spur level (about -60 dBc for 10 bits).
module sincos_lut
  import crs_pkg::*;
#(
  parameter int unsigned PHASE_W = 32
) (
  input  logic [PHASE_W-1:0]       phase,
  output logic signed [TRIG_W-1:0] cos_o,
  output logic signed [TRIG_W-1:0] sin_o
);
  localparam trig_tab_t COS_T = mk_trig(1'b0);
  localparam trig_tab_t SIN_T = mk_trig(1'b1);
  logic [LUT_BITS-1:0] idx;
  // Round to the nearest table entry.
  assign idx   = LUT_BITS'((phase + (PHASE_W'(1) << (PHASE_W - LUT_BITS - 1))) >> (PHASE_W - LUT_BITS));
  assign cos_o = COS_T[idx];
  assign sin_o = SIN_T[idx];
endmodule
