// efpga_fabric -- the embedded FPGA that stands in for a redacted block.
//
// ROWS x COLS tiles (efpga_tile) in a grid, x growing east and y growing
// north, ringed by one io_block per edge segment: COLS on the north and south
// edges, ROWS on the east and west edges, IO_PER_SIDE pads each, so
// NUM_IO = 2*(ROWS+COLS)*IO_PER_SIDE pads. Neighbouring tiles are joined by
// their unidirectional tracks; at the edge the tracks go to and come from
// the I/O blocks.
//
// Programming: one scan chain runs prog_din -> tiles in row-major order
// (index y*COLS+x) -> I/O blocks in the order N(x), E(y), S(x), W(y) (see
// efpga_pkg::io_index) -> prog_dout. Hold prog_en high for
// efpga_pkg::fabric_cfg_bits(...) clocks (480 at the defaults) and send the
// bitstream most significant bit first; bit 0 of the bitstream then sits in
// the first tile. Tiles differ in length because only the tracks whose
// length-L wire starts in a tile have switch-block bits there
// (efpga_pkg::tile_base gives each tile's offset). Pad index = io_index(side,pos)*IO_PER_SIDE + p.
// After programming, drop prog_en and pulse rst_n to clear the user
// flip-flops. The configured circuit then runs on clk.
//
// Timing: pad-to-pad paths through LUTs and routing are combinational; the
// configured user flip-flops are the only clocked state besides the chain.
// A bitstream can close combinational loops through the routing, as any
// FPGA fabric can; the bitstreams used here do not. Lint tools report the
// possible loops as circular logic on t_out, the tile-to-tile tracks (they
// are inherent to the fabric).
//
// The defaults are the 2x2 K4N2 fabric with channel width 18 that the paper
// uses for its first redacted block, with its length-4 wires; FRAC = 1 with
// N = 1 gives the fracturable 2x2 K4_frac_N1 alternative. The routing
// patterns, the I/O block and the chain order are this design's choices.
module efpga_fabric
  import efpga_pkg::*;
#(
  parameter int unsigned ROWS        = 2,
  parameter int unsigned COLS        = 2,
  parameter int unsigned K           = 4,
  parameter int unsigned N           = 2,
  parameter int unsigned FRAC        = 0,
  parameter int unsigned W           = 18,
  parameter int unsigned FC_IN       = 3,
  parameter int unsigned L           = 4,
  parameter int unsigned IO_PER_SIDE = 3,
  localparam int unsigned H        = W / 2,
  localparam int unsigned NUM_IO   = 2 * (ROWS + COLS) * IO_PER_SIDE,
  localparam int unsigned IO_CFG   = io_cfg_bits(W, IO_PER_SIDE),
  localparam int unsigned NTILE    = ROWS * COLS,
  localparam int unsigned NIOB     = 2 * (ROWS + COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              prog_en,
  input  logic              prog_din,
  output logic              prog_dout,
  input  logic [NUM_IO-1:0] pad_in,
  output logic [NUM_IO-1:0] pad_out,
  output logic [NUM_IO-1:0] pad_oe
);
  // tile routing ports, [row][col]
  logic [3:0][H-1:0] t_in  [ROWS][COLS];
  logic [3:0][H-1:0] t_out [ROWS][COLS];
  // I/O block track ports, by I/O block index
  logic [H-1:0] io_to   [NIOB];
  logic [H-1:0] io_from [NIOB];
  // scan chain links: 0..NTILE-1 tiles, NTILE.. I/O blocks
  logic [NTILE+NIOB:0] chain;

  assign chain[0]  = prog_din;
  assign prog_dout = chain[NTILE+NIOB];

  for (genvar y = 0; y < ROWS; y++) begin : g_row
    for (genvar x = 0; x < COLS; x++) begin : g_col
      localparam int unsigned TI = y * COLS + x;

      // north
      if (y == ROWS - 1) begin : g_n_io
        assign t_in[y][x][SIDE_N] = io_to[io_index(SIDE_N, x, ROWS, COLS)];
      end else begin : g_n_t
        assign t_in[y][x][SIDE_N] = t_out[y+1][x][SIDE_S];
      end
      // south
      if (y == 0) begin : g_s_io
        assign t_in[y][x][SIDE_S] = io_to[io_index(SIDE_S, x, ROWS, COLS)];
      end else begin : g_s_t
        assign t_in[y][x][SIDE_S] = t_out[y-1][x][SIDE_N];
      end
      // east
      if (x == COLS - 1) begin : g_e_io
        assign t_in[y][x][SIDE_E] = io_to[io_index(SIDE_E, y, ROWS, COLS)];
      end else begin : g_e_t
        assign t_in[y][x][SIDE_E] = t_out[y][x+1][SIDE_W];
      end
      // west
      if (x == 0) begin : g_w_io
        assign t_in[y][x][SIDE_W] = io_to[io_index(SIDE_W, y, ROWS, COLS)];
      end else begin : g_w_t
        assign t_in[y][x][SIDE_W] = t_out[y][x-1][SIDE_E];
      end

      efpga_tile #(.K(K), .N(N), .FRAC(FRAC), .W(W), .FC_IN(FC_IN), .L(L),
                 .X(x), .Y(y), .ROWS(ROWS), .COLS(COLS)) u_tile (
        .clk      (clk),
        .rst_n    (rst_n),
        .prog_en  (prog_en),
        .prog_din (chain[TI]),
        .prog_dout(chain[TI+1]),
        .trk_in   (t_in[y][x]),
        .trk_out  (t_out[y][x])
      );
    end
  end

  // tracks leaving the grid, gathered per I/O block
  for (genvar x = 0; x < COLS; x++) begin : g_io_ns
    assign io_from[io_index(SIDE_N, x, ROWS, COLS)] = t_out[ROWS-1][x][SIDE_N];
    assign io_from[io_index(SIDE_S, x, ROWS, COLS)] = t_out[0][x][SIDE_S];
  end
  for (genvar y = 0; y < ROWS; y++) begin : g_io_ew
    assign io_from[io_index(SIDE_E, y, ROWS, COLS)] = t_out[y][COLS-1][SIDE_E];
    assign io_from[io_index(SIDE_W, y, ROWS, COLS)] = t_out[y][0][SIDE_W];
  end

  for (genvar j = 0; j < NIOB; j++) begin : g_io
    logic [IO_CFG-1:0] io_cfg;

    cfg_chain #(.LEN(IO_CFG)) u_chain (
      .clk    (clk),
      .prog_en(prog_en),
      .din    (chain[NTILE+j]),
      .dout   (chain[NTILE+j+1]),
      .q      (io_cfg)
    );

    io_block #(.W(W), .IO_PER_SIDE(IO_PER_SIDE)) u_io (
      .cfg            (io_cfg),
      .pad_in         (pad_in[j*IO_PER_SIDE +: IO_PER_SIDE]),
      .pad_out        (pad_out[j*IO_PER_SIDE +: IO_PER_SIDE]),
      .pad_oe         (pad_oe[j*IO_PER_SIDE +: IO_PER_SIDE]),
      .trk_from_fabric(io_from[j]),
      .trk_to_fabric  (io_to[j])
    );
  end
endmodule
