// efpga_tile -- one fabric tile: CLB, two connection blocks, switch block and
// the tile's segment of the configuration scan chain.
//
// Routing: trk_in[d] are the H = W/2 tracks arriving from side d (N=0, E=1,
// S=2, W=3) and trk_out[d] the H tracks this tile drives towards side d.
// The horizontal connection block sees the horizontal channel
// {trk_in[E], trk_in[W]} and feeds the first ceil(I/2) CLB inputs; the
// vertical one sees {trk_in[N], trk_in[S]} and feeds the rest. The CLB's
// outputs enter the routing through the switch block.
//
// X, Y, ROWS and COLS give the tile's place in the grid, which decides where
// the length-L wires start (see switch_block). The defaults describe the
// south-west tile of a 2x2 fabric.
// Configuration: a cfg_chain of TILE_CFG bits between prog_din and prog_dout,
// laid out (LSB first) as horizontal CB | vertical CB | CLB | switch block
// (see efpga_pkg). Timing: routing is combinational; only BLE flip-flops and
// the chain are clocked. Bits shift while prog_en is high, and the CLB
// outputs are held at 0 meanwhile. Lint reports the CLB outputs as circular
// logic: the crossbar and the switch block can route them back into the
// CLB, as in any FPGA tile; only a bitstream decides whether a loop exists.
//
// The tile composition (CLB fed by two connection blocks, CLB outputs into the
// switch block) follows the tile drawing in the architecture description;
// which CLB inputs sit on which connection block is this design's choice.
module efpga_tile
  import efpga_pkg::*;
#(
  parameter int unsigned K     = 4,
  parameter int unsigned N     = 2,
  parameter int unsigned FRAC  = 0,
  parameter int unsigned W     = 18,
  parameter int unsigned FC_IN = 3,
  parameter int unsigned L     = 4,
  parameter int unsigned X     = 0,
  parameter int unsigned Y     = 0,
  parameter int unsigned ROWS  = 2,
  parameter int unsigned COLS  = 2,
  localparam int unsigned H    = W / 2,
  localparam int unsigned I    = clb_inputs(K, N),
  localparam int unsigned O    = clb_outputs(N, FRAC),
  localparam int unsigned TILE_CFG = tile_cfg_bits(K, N, FRAC, W, FC_IN, L, X, Y, ROWS, COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              prog_en,
  input  logic              prog_din,
  output logic              prog_dout,
  input  logic [3:0][H-1:0] trk_in,
  output logic [3:0][H-1:0] trk_out
);
  localparam int unsigned PX    = cbx_pins(K, N);
  localparam int unsigned PY    = cby_pins(K, N);
  localparam int unsigned CS    = cb_sel_bits(FC_IN);
  localparam int unsigned OFF_Y = tile_off_cby(K, N, FC_IN);
  localparam int unsigned OFF_C = tile_off_clb(K, N, FC_IN);
  localparam int unsigned OFF_S = tile_off_sb(K, N, FRAC, FC_IN);
  localparam int unsigned CLBB  = clb_cfg_bits(K, N, FRAC);
  localparam int unsigned SBB   = sb_cfg_bits(W, L, X, Y, ROWS, COLS);

  logic [TILE_CFG-1:0] cfg;
  logic [I-1:0]        clb_in;
  logic [O-1:0]        clb_out;
  logic [W-1:0]        chan_x, chan_y;

  cfg_chain #(.LEN(TILE_CFG)) u_chain (
    .clk    (clk),
    .prog_en(prog_en),
    .din    (prog_din),
    .dout   (prog_dout),
    .q      (cfg)
  );

  assign chan_x = {trk_in[SIDE_E], trk_in[SIDE_W]};
  assign chan_y = {trk_in[SIDE_N], trk_in[SIDE_S]};

  conn_block #(.W(W), .PINS(PX), .FC_IN(FC_IN)) u_cbx (
    .cfg (cfg[0 +: PX*CS]),
    .chan(chan_x),
    .pins(clb_in[PX-1:0])
  );

  conn_block #(.W(W), .PINS(PY), .FC_IN(FC_IN)) u_cby (
    .cfg (cfg[OFF_Y +: PY*CS]),
    .chan(chan_y),
    .pins(clb_in[I-1:PX])
  );

  clb #(.K(K), .N(N), .FRAC(FRAC)) u_clb (
    .clk    (clk),
    .rst_n  (rst_n),
    .prog_en(prog_en),
    .cfg    (cfg[OFF_C +: CLBB]),
    .clb_in (clb_in),
    .clb_out(clb_out)
  );

  switch_block #(.W(W), .O(O), .L(L), .X(X), .Y(Y), .ROWS(ROWS), .COLS(COLS)) u_sb (
    .cfg    (cfg[OFF_S +: SBB]),
    .trk_in (trk_in),
    .clb_out(clb_out),
    .trk_out(trk_out)
  );
endmodule
