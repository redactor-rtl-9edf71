// efpga_pkg -- sizes, bit layouts and routing patterns shared by the eFPGA fabric.
//
// The fabric is an island-style eFPGA: a grid of tiles (CLB + two connection
// blocks + switch block) ringed by I/O blocks, configured by one scan chain.
// Every configurable element reads its setting from a field of the chain, and
// the helpers below are the single definition of where each field sits and
// which wire each select value picks. The RTL and the testbenches both use
// them, so a bitstream built from these functions means the same thing to both.
//
// Sides are numbered N=0, E=1, S=2, W=3. Routing tracks are unidirectional
// and W/2 tracks run each way in every channel.
//
// Followed from the architecture description: K-input LUTs, N BLEs per CLB,
// I = K(N+1)/2 CLB inputs, Fs = 3 switch-block connections per incoming track,
// Fc_in = 0.15 (rounded up to whole tracks), wires spanning L = 4 tiles.
// Choices of this design: the track patterns, the staggering of wire starts
// and the order of fields in the chain.
package efpga_pkg;

  typedef enum logic [1:0] {SIDE_N = 2'd0, SIDE_E = 2'd1, SIDE_S = 2'd2, SIDE_W = 2'd3} side_e;

  // select width of a mux with n inputs (at least one bit)
  function automatic int unsigned sel_bits(int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

  // ---------------- logic ----------------
  function automatic int unsigned clb_inputs(int unsigned k, int unsigned n);
    return (k * (n + 1)) / 2;                  // I = K(N+1)/2
  endfunction

  function automatic int unsigned ble_outputs(int unsigned frac);
    return 1 + frac;                           // a fractured LUT has two outputs
  endfunction

  function automatic int unsigned clb_outputs(int unsigned n, int unsigned frac);
    return n * ble_outputs(frac);
  endfunction

  // BLE field layout (LSB first): truth table [2^K] | FLUT mode [FRAC] | register select per output
  function automatic int unsigned ble_cfg_bits(int unsigned k, int unsigned frac);
    return (1 << k) + frac + ble_outputs(frac);
  endfunction

  function automatic int unsigned xbar_sel_bits(int unsigned k, int unsigned n, int unsigned frac);
    return sel_bits(clb_inputs(k, n) + clb_outputs(n, frac));
  endfunction

  function automatic int unsigned xbar_cfg_bits(int unsigned k, int unsigned n, int unsigned frac);
    return n * k * xbar_sel_bits(k, n, frac);
  endfunction

  // CLB field layout: crossbar (BLE b input k at (b*K+k)*XS) | BLE 0 | BLE 1 | ...
  function automatic int unsigned clb_cfg_bits(int unsigned k, int unsigned n, int unsigned frac);
    return xbar_cfg_bits(k, n, frac) + n * ble_cfg_bits(k, frac);
  endfunction

  // ---------------- routing ----------------
  // connection block: pin p, candidate j -> channel track
  function automatic int unsigned cb_track(int unsigned p, int unsigned j, int unsigned w, int unsigned fc);
    return (p + j * (w / fc)) % w;
  endfunction

  function automatic int unsigned cbx_pins(int unsigned k, int unsigned n);
    return (clb_inputs(k, n) + 1) / 2;         // horizontal CB feeds the first half of the CLB inputs
  endfunction

  function automatic int unsigned cby_pins(int unsigned k, int unsigned n);
    return clb_inputs(k, n) - cbx_pins(k, n);
  endfunction

  // switch block. Wires are unidirectional and span L tiles. A wire is driven
  // by a switch-block mux only in the tile where it starts; in the other
  // tiles it passes straight through (and can still be picked up by turns).
  // Starts are staggered: the track t leaving side d of tile (x,y) starts a
  // wire when (travel_pos + t) mod L == 0, travel_pos being the tile's
  // distance from the grid edge the track comes from.
  // Candidates of a driven track on side d: c = 0,1,2 -> incoming track of the
  // same index from side sb_src_side(d,c); c = 3 -> CLB output sb_clb_out.
  localparam int unsigned SB_SEL_BITS = 2;
  function automatic int unsigned sb_src_side(int unsigned d, int unsigned c);
    case (c)
      0:       return (d + 2) % 4;             // straight through
      1:       return (d + 1) % 4;             // turn
      default: return (d + 3) % 4;             // turn
    endcase
  endfunction

  function automatic int unsigned sb_clb_out(int unsigned d, int unsigned t, int unsigned o,
                                             int unsigned l);
    return (t / l + d) % o;
  endfunction

  function automatic int unsigned travel_pos(int unsigned d, int unsigned x, int unsigned y,
                                             int unsigned rows, int unsigned cols);
    case (d)
      0:       return y;                       // northbound: distance from the south edge
      1:       return x;                       // eastbound
      2:       return rows - 1 - y;            // southbound
      default: return cols - 1 - x;            // westbound
    endcase
  endfunction

  function automatic bit sb_drives(int unsigned d, int unsigned t, int unsigned l,
                                   int unsigned x, int unsigned y, int unsigned rows, int unsigned cols);
    return ((travel_pos(d, x, y, rows, cols) + t) % l) == 0;
  endfunction

  // offset of the select of driven track (d,t) inside the switch-block field:
  // driven tracks are numbered in order d*H+t, passing tracks take no bits
  function automatic int unsigned sb_field(int unsigned d, int unsigned t, int unsigned w, int unsigned l,
                                           int unsigned x, int unsigned y, int unsigned rows, int unsigned cols);
    int unsigned n = 0;
    for (int unsigned i = 0; i < d * (w / 2) + t; i++)
      if (sb_drives(i / (w / 2), i % (w / 2), l, x, y, rows, cols)) n++;
    return n * SB_SEL_BITS;
  endfunction

  function automatic int unsigned sb_cfg_bits(int unsigned w, int unsigned l, int unsigned x, int unsigned y,
                                              int unsigned rows, int unsigned cols);
    int unsigned b = sb_field(3, w / 2, w, l, x, y, rows, cols);   // one past the last track
    return (b == 0) ? 1 : b;                   // a tile keeps at least one bit so the chain is never empty
  endfunction

  // ---------------- I/O ----------------
  // pad p field: track select | output enable
  function automatic int unsigned io_sel_bits(int unsigned w);
    return sel_bits(w / 2);
  endfunction

  function automatic int unsigned io_cfg_bits(int unsigned w, int unsigned iops);
    return iops * (io_sel_bits(w) + 1);
  endfunction

  // ---------------- tile ----------------
  // tile field layout: CBX pins | CBY pins | CLB | SB
  function automatic int unsigned cb_sel_bits(int unsigned fc);
    return sel_bits(fc);
  endfunction

  function automatic int unsigned tile_off_cby(int unsigned k, int unsigned n, int unsigned fc);
    return cbx_pins(k, n) * cb_sel_bits(fc);
  endfunction

  function automatic int unsigned tile_off_clb(int unsigned k, int unsigned n, int unsigned fc);
    return clb_inputs(k, n) * cb_sel_bits(fc);
  endfunction

  function automatic int unsigned tile_off_sb(int unsigned k, int unsigned n, int unsigned frac, int unsigned fc);
    return tile_off_clb(k, n, fc) + clb_cfg_bits(k, n, frac);
  endfunction

  function automatic int unsigned tile_cfg_bits(int unsigned k, int unsigned n, int unsigned frac,
                                                int unsigned w, int unsigned fc, int unsigned l,
                                                int unsigned x, int unsigned y,
                                                int unsigned rows, int unsigned cols);
    return tile_off_sb(k, n, frac, fc) + sb_cfg_bits(w, l, x, y, rows, cols);
  endfunction

  // ---------------- fabric ----------------
  // chain order: tiles row-major (index y*COLS+x), then I/O blocks N(x), E(y), S(x), W(y).
  // The first module after prog_din holds the lowest bits of the bitstream;
  // the bitstream is shifted in most significant bit first.
  function automatic int unsigned tile_base(int unsigned k, int unsigned n, int unsigned frac,
                                            int unsigned w, int unsigned fc, int unsigned l,
                                            int unsigned x, int unsigned y,
                                            int unsigned rows, int unsigned cols);
    int unsigned b = 0;
    for (int unsigned i = 0; i < y * cols + x; i++)
      b += tile_cfg_bits(k, n, frac, w, fc, l, i % cols, i / cols, rows, cols);
    return b;
  endfunction

  function automatic int unsigned fabric_cfg_bits(int unsigned k, int unsigned n, int unsigned frac,
                                                  int unsigned w, int unsigned fc, int unsigned l,
                                                  int unsigned rows, int unsigned cols, int unsigned iops);
    return tile_base(k, n, frac, w, fc, l, 0, rows, rows, cols) + 2 * (rows + cols) * io_cfg_bits(w, iops);
  endfunction

  function automatic int unsigned io_index(side_e side, int unsigned pos,
                                           int unsigned rows, int unsigned cols);
    case (side)
      SIDE_N:  return pos;
      SIDE_E:  return cols + pos;
      SIDE_S:  return cols + rows + pos;
      default: return 2 * cols + rows + pos;
    endcase
  endfunction

endpackage
