// switch_block -- switch block at a tile corner: joins the four channel sides.
//
// Tracks are unidirectional, H = W/2 leaving on each side (N, E, S, W) and H
// arriving from each side. Wires span L tiles. A track whose wire starts in
// this tile (efpga_pkg::sb_drives, starts staggered over the tracks) is
// driven by a 4-input mux:
//   select 0: incoming track t from the opposite side (straight on)
//   select 1: incoming track t from side (d+1) mod 4 (a turn)
//   select 2: incoming track t from side (d+3) mod 4 (the other turn)
//   select 3: CLB output (t/L + d) mod O (where logic enters the routing)
// Every other track is the middle of a longer wire and simply continues:
// trk_out[d][t] = trk_in[opposite side][t], with no configuration bits.
// Each incoming track can thus reach three places (Fs = 3, same-index
// "disjoint" pattern) and each CLB output only the few tracks that start
// here, about one in ten of the channel. Combinational.
// Configuration: driven tracks in the order d*H+t, 2 bits each
// (efpga_pkg::sb_field). Port arrays are indexed [side][track].
// X, Y, ROWS, COLS place the tile in the grid so the staggering lines up
// between neighbouring tiles.
//
// Fs = 3 and L = 4 follow the paper's fabric parameters, and the sparse CLB
// output connection stands in for its Fc_out = 0.1. The disjoint pattern, the
// staggering rule and the CLB-output assignment are this design's choices.
module switch_block
  import efpga_pkg::*;
#(
  parameter int unsigned W    = 18,
  parameter int unsigned O    = 2,
  parameter int unsigned L    = 4,
  parameter int unsigned X    = 0,
  parameter int unsigned Y    = 0,
  parameter int unsigned ROWS = 2,
  parameter int unsigned COLS = 2,
  localparam int unsigned H   = W / 2,
  localparam int unsigned CFG = sb_cfg_bits(W, L, X, Y, ROWS, COLS)
) (
  input  logic [CFG-1:0]     cfg,
  input  logic [3:0][H-1:0]  trk_in,
  input  logic [O-1:0]       clb_out,
  output logic [3:0][H-1:0]  trk_out
);
  for (genvar d = 0; d < 4; d++) begin : g_side
    for (genvar t = 0; t < H; t++) begin : g_trk
      if (sb_drives(d, t, L, X, Y, ROWS, COLS)) begin : g_drv
        localparam int unsigned F = sb_field(d, t, W, L, X, Y, ROWS, COLS);
        logic [3:0] cand;
        assign cand = {clb_out[sb_clb_out(d, t, O, L)],
                       trk_in[sb_src_side(d, 2)][t],
                       trk_in[sb_src_side(d, 1)][t],
                       trk_in[sb_src_side(d, 0)][t]};
        cfg_mux #(.NIN(4), .SW(SB_SEL_BITS)) u_mux (
          .data(cand),
          .sel (cfg[F +: SB_SEL_BITS]),
          .y   (trk_out[d][t])
        );
      end else begin : g_pass
        assign trk_out[d][t] = trk_in[sb_src_side(d, 0)][t];
      end
    end
  end
endmodule
