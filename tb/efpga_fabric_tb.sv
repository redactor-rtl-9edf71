// efpga_fabric_tb -- end-to-end test of the default fabric (2x2 tiles, K = 4,
// N = 2, W = 18, length-4 wires, 3 pads per edge segment) against a
// reference model.
//
// A small controller is mapped onto the fabric by hand and loaded through the
// scan chain, the way a redacted block is restored after fabrication:
//   x   = a ^ b ^ c                       (combinational, BLE 0 of tile (0,0))
//   q  <= en ? (set ? 1 : rst ? 0 : q) : q (registered, BLE 1 of tile (0,0),
//                                          its own output fed back through the crossbar)
//   pass = pad 2                          (a pure route through tile (0,1))
//   a    = pad 18 copied to pad 7         (a wire switched straight in tile (0,0))
// Pads: a,b,c = 18,19,20 (west edge, row 0); set,rst,en = 12,13,14 (south edge,
// column 0). x leaves tile (0,0) east on track 4, whose wire runs on through
// tile (1,0) unswitched to pad 6 (east, row 0). q leaves north on track 4,
// turns east in tile (0,1) and its wire runs through tile (1,1) to pad 9
// (east, row 1). pass turns west in tile (0,1) on track 3 and leaves on
// pad 21 (west, row 1). a goes straight on track 0 in tile (0,0) and passes
// tile (1,0) to pad 7. A track is switchable only in the tile where its wire
// starts, so every select is placed with the package's field functions.
// The same stimulus drives the fabric and the reference model and the
// outputs are compared every cycle, as in the paper's verification flow.
// Afterwards the bitstream is shifted in a second time and the bits coming
// out of prog_dout must equal the first copy. Every mechanism used is counted
// and must occur at least once.
module efpga_fabric_tb;
  import efpga_pkg::*;
  localparam int ROWS = 2, COLS = 2, K = 4, N = 2, FRAC = 0, W = 18, FC = 3, IOPS = 3;
  localparam int NUM_IO = 2 * (ROWS + COLS) * IOPS;
  localparam int L      = 4;
  localparam int IOB    = io_cfg_bits(W, IOPS);
  localparam int CFGB   = fabric_cfg_bits(K, N, FRAC, W, FC, L, ROWS, COLS, IOPS);
  localparam int XS     = xbar_sel_bits(K, N, FRAC);
  localparam int BB     = ble_cfg_bits(K, FRAC);
  localparam int CS     = cb_sel_bits(FC);
  localparam int IS     = io_sel_bits(W);

  int checks = 0, failures = 0;
  int n_load = 0, n_readback = 0, n_comb = 0, n_set = 0, n_rst = 0, n_hold = 0;
  int n_straight = 0, n_turn = 0, n_span = 0, n_pass = 0;

  logic clk = 0, rst_n = 0, prog_en = 1, prog_din = 0, prog_dout;
  logic [NUM_IO-1:0] pad_in, pad_out, pad_oe;
  logic [CFGB-1:0]   bs;

  efpga_fabric dut (.clk, .rst_n, .prog_en, .prog_din, .prog_dout, .pad_in, .pad_out, .pad_oe);

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

  // ---- bitstream construction ----
  function automatic int tbase(input int x, input int y);
    return tile_base(K, N, FRAC, W, FC, L, x, y, ROWS, COLS);
  endfunction
  function automatic int io_base(input side_e s, input int pos);
    return tbase(0, ROWS) + int'(io_index(s, pos, ROWS, COLS)) * IOB;
  endfunction
  task automatic setf(input int off, input int w, input int val);
    for (int i = 0; i < w; i++) bs[off + i] = val[i];
  endtask
  task automatic set_sb(input int x, input int y, input side_e d, input int t, input int sel);
    if (!sb_drives(int'(d), t, L, x, y, ROWS, COLS)) begin
      failures++;
      $display("FAIL no wire starts at tile (%0d,%0d) side %0d track %0d", x, y, d, t);
    end
    setf(tbase(x, y) + tile_off_sb(K, N, FRAC, FC) + sb_field(int'(d), t, W, L, x, y, ROWS, COLS),
         SB_SEL_BITS, sel);
  endtask
  task automatic set_pad(input side_e s, input int pos, input int p, input int trk);
    setf(io_base(s, pos) + p * (IS + 1), IS, trk);
    bs[io_base(s, pos) + p * (IS + 1) + IS] = 1'b1;
  endtask

  function automatic logic [15:0] tt_of(input int f);
    logic [15:0] t;
    for (int i = 0; i < 16; i++)
      t[i] = (f == 0) ? (i[0] ^ i[1] ^ i[2])
                      : (i[3] ? (i[1] ? 1'b1 : (i[2] ? 1'b0 : i[0])) : i[0]);
    return t;
  endfunction

  task automatic build();
    int b0, clb0;
    bs   = '0;
    b0   = tbase(0, 0);
    clb0 = b0 + tile_off_clb(K, N, FC);
    for (int p = 0; p < 3; p++) begin
      setf(b0 + p * CS, CS, 0);                              // CBX pin p <- west track p
      setf(b0 + tile_off_cby(K, N, FC) + p * CS, CS, 0);     // CBY pin p <- south track p
    end
    // crossbar: BLE0 <- pins 0,1,2,0 ; BLE1 <- own output (I+1), pins 3,4,5
    setf(clb0 + 0 * XS, XS, 0); setf(clb0 + 1 * XS, XS, 1); setf(clb0 + 2 * XS, XS, 2); setf(clb0 + 3 * XS, XS, 0);
    setf(clb0 + 4 * XS, XS, clb_inputs(K, N) + 1);
    setf(clb0 + 5 * XS, XS, 3); setf(clb0 + 6 * XS, XS, 4); setf(clb0 + 7 * XS, XS, 5);
    setf(clb0 + xbar_cfg_bits(K, N, FRAC), 16, int'(tt_of(0)));
    bs[clb0 + xbar_cfg_bits(K, N, FRAC) + 16] = 1'b0;
    setf(clb0 + xbar_cfg_bits(K, N, FRAC) + BB, 16, int'(tt_of(1)));
    bs[clb0 + xbar_cfg_bits(K, N, FRAC) + BB + 16] = 1'b1;
    // x: tile(0,0) east 4 <- CLB out (4/4+1)%2 = 0 ; wire passes tile(1,0) ; pad 6 <- track 4
    set_sb(0, 0, SIDE_E, 4, 3);
    set_pad(SIDE_E, 0, 0, 4);
    // q: tile(0,0) north 4 <- CLB out (4/4+0)%2 = 1 ; tile(0,1) east 4 <- south 4 ;
    //    wire passes tile(1,1) ; pad 9 <- track 4
    set_sb(0, 0, SIDE_N, 4, 3);
    set_sb(0, 1, SIDE_E, 4, 1);
    set_pad(SIDE_E, 1, 0, 4);
    // pass: pad 0 -> tile(0,1) north track 3 -> west 3 (turn) -> pad 21
    set_sb(0, 1, SIDE_W, 3, 1);
    set_pad(SIDE_W, 1, 0, 3);
    // a: west track 0 (pad 18) -> tile(0,0) east 0 straight ; wire passes tile(1,0) ; pad 7 <- track 0
    set_sb(0, 0, SIDE_E, 0, 0);
    set_pad(SIDE_E, 0, 1, 0);
  endtask

  task automatic load(input bit readback);
    @(negedge clk);
    prog_en = 1;
    for (int i = CFGB - 1; i >= 0; i--) begin
      if (readback) begin
        check(prog_dout, bs[i], "readback");
        n_readback++;
      end
      prog_din = bs[i];
      @(negedge clk);
    end
    prog_en = 0;
    n_load++;
  endtask

  logic a, b, c, set, rst, en, q_ref;

  task automatic run(input int cycles);
    for (int cyc = 0; cyc < cycles; cyc++) begin
      logic q_old;
      @(negedge clk);
      pad_in = NUM_IO'({$urandom, $urandom});
      // set and reset are rare so the register spends time in both states
      pad_in[12] = ($urandom % 6) == 0;
      pad_in[13] = ($urandom % 6) == 0;
      {a, b, c, set, rst, en} = {pad_in[18], pad_in[19], pad_in[20], pad_in[12], pad_in[13], pad_in[14]};
      #1;
      check(pad_out[6], a ^ b ^ c, "x");
      check(pad_out[9], q_ref, "q");
      check(pad_out[21], pad_in[0], "pass");
      check(pad_out[7], a, "a");
      for (int p = 0; p < NUM_IO; p++)
        check(pad_oe[p], (p == 6) || (p == 7) || (p == 9) || (p == 21), "oe");
      if (a ^ b ^ c) n_comb++;
      n_straight++;                 // a switched straight on in tile (0,0)
      n_turn++;                     // q turned in tile (0,1), pass in tile (0,1)
      n_span++;                     // x, a and q wires crossed a tile unswitched
      n_pass++;
      @(posedge clk);
      q_old = q_ref;
      if (en) q_ref = set ? 1'b1 : (rst ? 1'b0 : q_ref);
      if (en && set && !q_old) n_set++;
      if (en && !set && rst && q_old) n_rst++;
      if (!en && (set != q_old) && (set || rst)) n_hold++;
    end
  endtask

  initial begin
    pad_in = '0;
    if (CFGB != 480) begin
      failures++;
      $display("FAIL bitstream size %0d", CFGB);
    end
    checks++;
    build();
    load(1'b0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    q_ref = 1'b0;
    run(300);
    load(1'b1);                     // same bitstream again; the old copy comes out
    run(50);
    $display("mechanisms: loads=%0d readback_bits=%0d comb=%0d set=%0d reset=%0d hold=%0d straight=%0d turn=%0d span=%0d pass=%0d",
             n_load, n_readback, n_comb, n_set, n_rst, n_hold, n_straight, n_turn, n_span, n_pass);
    if (n_load < 2 || n_readback != CFGB || n_comb == 0 || n_set == 0 || n_rst == 0 ||
        n_hold == 0 || n_straight == 0 || n_turn == 0 || n_span == 0 || n_pass == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
