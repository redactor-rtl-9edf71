// io_block -- I/O block on one edge segment of the fabric.
//
// Holds IO_PER_SIDE pads. Into the fabric: incoming track t of the adjacent
// channel is driven by pad input t mod IO_PER_SIDE, so each pad reaches the
// fabric on several tracks. Out of the fabric: pad p's output is a mux over
// the H = W/2 tracks leaving the fabric here, and a configuration bit sets the
// pad's output enable. Combinational.
// Configuration: pad p at bits [p*(S+1) +: S+1] = {output enable, track select}.
//
// The paper only places I/O blocks around the tiles and tunes the number of
// pins per tile; everything inside this block is this design's choice.
module io_block
  import efpga_pkg::*;
#(
  parameter int unsigned W           = 18,
  parameter int unsigned IO_PER_SIDE = 3,
  localparam int unsigned H   = W / 2,
  localparam int unsigned S   = io_sel_bits(W),
  localparam int unsigned CFG = io_cfg_bits(W, IO_PER_SIDE)
) (
  input  logic [CFG-1:0]         cfg,
  input  logic [IO_PER_SIDE-1:0] pad_in,
  output logic [IO_PER_SIDE-1:0] pad_out,
  output logic [IO_PER_SIDE-1:0] pad_oe,
  input  logic [H-1:0]           trk_from_fabric,
  output logic [H-1:0]           trk_to_fabric
);
  for (genvar t = 0; t < H; t++) begin : g_in
    assign trk_to_fabric[t] = pad_in[t % IO_PER_SIDE];
  end

  for (genvar p = 0; p < IO_PER_SIDE; p++) begin : g_pad
    cfg_mux #(.NIN(H), .SW(S)) u_mux (
      .data(trk_from_fabric),
      .sel (cfg[p*(S+1) +: S]),
      .y   (pad_out[p])
    );
    assign pad_oe[p] = cfg[p*(S+1) + S];
  end
endmodule
