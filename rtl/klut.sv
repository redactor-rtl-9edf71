// klut -- K-input look-up table, optionally fracturable (FLUT).
//
// FRAC = 0: a plain K-LUT, lut_out[0] = cfg_lut[lut_in].
// FRAC = 1: a fracturable LUT with two outputs. With cfg_frac = 0 it is one
// K-LUT on lut_out[0]. With cfg_frac = 1 it splits into two (K-1)-LUTs that
// share inputs lut_in[K-2:0]: lut_out[0] reads the lower half of the truth
// table, lut_out[1] the upper half. lut_out[1] always carries the upper-half
// (K-1)-LUT, so in K-LUT mode it is simply not used.
// Combinational; cfg_frac is ignored when FRAC = 0, and lint then reports
// it as an unused input (the port is kept so both variants share an interface).
//
// The two modes and the shared inputs follow the paper's description of
// fracturable LUTs; which half goes to which output is this design's choice.
module klut #(
  parameter int unsigned K    = 4,
  parameter int unsigned FRAC = 0
) (
  input  logic [(1<<K)-1:0] cfg_lut,
  input  logic              cfg_frac,
  input  logic [K-1:0]      lut_in,
  output logic [FRAC:0]     lut_out
);
  logic [K-2:0] low_in;
  logic         lo, hi;

  assign low_in = lut_in[K-2:0];
  assign lo     = cfg_lut[{1'b0, low_in}];      // (K-1)-LUT over the lower half
  assign hi     = cfg_lut[{1'b1, low_in}];      // (K-1)-LUT over the upper half

  if (FRAC == 0) begin : g_lut
    assign lut_out[0] = lut_in[K-1] ? hi : lo;  // last mux stage of the K-LUT
  end else begin : g_flut
    assign lut_out[0] = (lut_in[K-1] && !cfg_frac) ? hi : lo;
    assign lut_out[1] = hi;
  end
endmodule
