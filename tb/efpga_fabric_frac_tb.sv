// efpga_fabric_frac_tb -- end-to-end test of the fracturable-LUT fabric
// (2x2 tiles, K = 4, N = 1, FLUTs), the alternative the paper pairs with the
// regular 2x2 K4N2 fabric.
//
// Phase 1 programs the single FLUT of tile (0,0) in fractured mode: two
// 3-input functions of the same inputs a,b,c, and3 = a&b&c on output 0 and
// or3 = a|b|c on output 1. and3 leaves east on track 4, a length-4 wire
// that runs through tile (1,0) unswitched to pad 6; or3 leaves north on
// track 4 through tile (0,1) to pad 0.
// Phase 2 reloads the chain with the same routing but the FLUT as one
// 4-input LUT, xor4 = a^b^c^d, on pad 6.
// Pads: a,b = 18,19 (west, row 0), c,d = 12,13 (south, column 0).
module efpga_fabric_frac_tb;
  import efpga_pkg::*;
  localparam int ROWS = 2, COLS = 2, K = 4, N = 1, FRAC = 1, W = 18, FC = 3, IOPS = 3;
  localparam int L      = 4;
  localparam int NUM_IO = 2 * (ROWS + COLS) * IOPS;
  localparam int IOB    = io_cfg_bits(W, IOPS);
  localparam int CFGB   = fabric_cfg_bits(K, N, FRAC, W, FC, L, ROWS, COLS, IOPS);
  localparam int XS     = xbar_sel_bits(K, N, FRAC);
  localparam int CS     = cb_sel_bits(FC);
  localparam int IS     = io_sel_bits(W);

  int checks = 0, failures = 0, n_frac = 0, n_lut4 = 0, n_split = 0;
  logic clk = 0, rst_n = 0, prog_en = 1, prog_din = 0, prog_dout;
  logic [NUM_IO-1:0] pad_in, pad_out, pad_oe;
  logic [CFGB-1:0]   bs;

  efpga_fabric #(.N(N), .FRAC(FRAC)) dut (
    .clk, .rst_n, .prog_en, .prog_din, .prog_dout, .pad_in, .pad_out, .pad_oe);

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t got=%b exp=%b", what, $time, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic setf(input int off, input int w, input int val);
    for (int i = 0; i < w; i++) bs[off + i] = val[i];
  endtask
  function automatic int tbase(input int x, input int y);
    return tile_base(K, N, FRAC, W, FC, L, x, y, ROWS, COLS);
  endfunction
  task automatic set_sb(input int x, input int y, input side_e d, input int t, input int sel);
    setf(tbase(x, y) + tile_off_sb(K, N, FRAC, FC) + sb_field(int'(d), t, W, L, x, y, ROWS, COLS),
         SB_SEL_BITS, sel);
  endtask
  task automatic set_pad(input side_e s, input int pos, input int p, input int trk);
    int base;
    base = tbase(0, ROWS) + int'(io_index(s, pos, ROWS, COLS)) * IOB + p * (IS + 1);
    setf(base, IS, trk);
    bs[base + IS] = 1'b1;
  endtask

  task automatic build(input bit fractured);
    int clb0, ble0;
    logic [15:0] tt;
    bs   = '0;
    clb0 = tile_off_clb(K, N, FC);
    ble0 = clb0 + xbar_cfg_bits(K, N, FRAC);
    setf(0 * CS, CS, 0);                               // CBX pin 0 <- west 0 (pad 18)
    setf(1 * CS, CS, 0);                               // CBX pin 1 <- west 1 (pad 19)
    setf(tile_off_cby(K, N, FC) + 0 * CS, CS, 0);      // CBY pin 0 <- south 0 (pad 12)
    setf(tile_off_cby(K, N, FC) + 1 * CS, CS, 0);      // CBY pin 1 <- south 1 (pad 13)
    for (int k = 0; k < 4; k++) setf(clb0 + k * XS, XS, k);
    for (int i = 0; i < 16; i++)
      if (fractured) tt[i] = (i < 8) ? (i[2:0] == 3'b111) : (i[2:0] != 3'b000);
      else           tt[i] = ^i[3:0];
    setf(ble0, 16, int'(tt));
    bs[ble0 + 16] = fractured;                          // FLUT mode; both outputs combinational
    set_sb(0, 0, SIDE_E, 4, 3);                         // east 4  <- CLB out (4/4+1)%2 = 0
    set_pad(SIDE_E, 0, 0, 4);                           // pad 6
    set_sb(0, 0, SIDE_N, 4, 3);                         // north 4 <- CLB out (4/4+0)%2 = 1
    set_pad(SIDE_N, 0, 0, 4);                           // pad 0
  endtask

  task automatic load();
    @(negedge clk);
    prog_en = 1;
    for (int i = CFGB - 1; i >= 0; i--) begin
      prog_din = bs[i];
      @(negedge clk);
    end
    prog_en = 0;
  endtask

  initial begin
    logic a, b, c, d;
    pad_in = '0;
    build(1'b1);
    load();
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      pad_in = NUM_IO'({$urandom, $urandom});
      {a, b, c, d} = {pad_in[18], pad_in[19], pad_in[12], pad_in[13]};
      #1;
      check(pad_out[6], a & b & c, "and3");
      check(pad_out[0], a | b | c, "or3");
      n_frac++;
      if ((a & b & c) != (a | b | c)) n_split++;   // the two halves differ
    end
    build(1'b0);
    load();
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      pad_in = NUM_IO'({$urandom, $urandom});
      {a, b, c, d} = {pad_in[18], pad_in[19], pad_in[12], pad_in[13]};
      #1;
      check(pad_out[6], a ^ b ^ c ^ d, "xor4");
      if (d) n_lut4++;                               // the fourth input mattered
    end
    $display("mechanisms: fractured=%0d halves_differ=%0d lut4_with_in3=%0d", n_frac, n_split, n_lut4);
    if (n_frac == 0 || n_split == 0 || n_lut4 == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
