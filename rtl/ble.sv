// ble -- basic logic element: a K-LUT (or FLUT), a D flip-flop and an output mux.
//
// Each LUT output feeds a D flip-flop and, in parallel, the output mux; the mux
// select is a configuration bit that chooses the flip-flop (1, sequential) or
// the LUT output itself (0, combinational). With FRAC = 1 the LUT is
// fracturable and both of its outputs get their own flip-flop and mux.
//
// Configuration (LSB first): truth table [2^K] | FLUT mode bit (FRAC = 1 only) |
// register select, one bit per output.
// Timing: combinational mode adds no cycle; registered mode adds one clock.
// The flip-flops reset asynchronously to 0 on rst_n low. While prog_en is
// high (the bitstream is being shifted in) the outputs are held at 0, so a
// half-loaded configuration cannot close an oscillating loop through LUTs.
//
// The LUT -> DFF -> configuration-controlled MUX structure follows the
// architecture description; the select polarity, the reset and the output
// hold during programming are this design's choices.
module ble
  import efpga_pkg::*;
#(
  parameter int unsigned K    = 4,
  parameter int unsigned FRAC = 0,
  localparam int unsigned CFG  = ble_cfg_bits(K, FRAC),
  localparam int unsigned NOUT = ble_outputs(FRAC)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            prog_en,
  input  logic [CFG-1:0]  cfg,
  input  logic [K-1:0]    ble_in,
  output logic [NOUT-1:0] ble_out
);
  localparam int unsigned LUTB = 1 << K;

  logic [NOUT-1:0] lut_q, ff_q, reg_sel;
  logic            frac_mode;

  if (FRAC != 0) begin : g_mode
    assign frac_mode = cfg[LUTB];
  end else begin : g_nomode
    assign frac_mode = 1'b0;
  end
  assign reg_sel = cfg[LUTB+FRAC +: NOUT];

  klut #(.K(K), .FRAC(FRAC)) u_lut (
    .cfg_lut (cfg[LUTB-1:0]),
    .cfg_frac(frac_mode),
    .lut_in  (ble_in),
    .lut_out (lut_q)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ff_q <= '0;
    else        ff_q <= lut_q;

  for (genvar o = 0; o < NOUT; o++) begin : g_out
    assign ble_out[o] = !prog_en && (reg_sel[o] ? ff_q[o] : lut_q[o]);
  end
endmodule
