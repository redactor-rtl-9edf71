// fabric_size_check -- programs and checks one fabric of a given size; used
// by efpga_fabric_sizes_tb, which runs one per fabric size.
//
// Builds a bitstream for the fabric with the package's field functions and
// loads it through the scan chain. Every BLE of tile (0,0) gets the same
// crossbar inputs (horizontal-CB pins 0 and 1, i.e. west tracks 0 and 1,
// which carry west pads 0 and 1 of row 0) and the truth table of a ^ b, so
// every logic-block output carries the same function whatever its index.
// The switch block of tile (0,0) sends a logic-block output east on track 0,
// where a length-4 wire starts; on a wider grid the wire runs through up to
// three more tiles unswitched. East pad 0 of row 0 drives track 0 out.
// Phase 1 runs the BLEs combinationally and checks the pad in the same
// cycle; phase 2 reloads the chain with the register-select bits set and
// checks that the pad shows a ^ b one clock late. Each phase's bitstream is
// also read back through prog_dout during the next load.
// Interface: done goes high when both phases are over; checks and failures
// count the comparisons. Free-running clock of 10 time units.
module fabric_size_check
  import efpga_pkg::*;
#(
  parameter int unsigned ROWS = 2,
  parameter int unsigned COLS = 2,
  parameter int unsigned K    = 4,
  parameter int unsigned N    = 2,
  parameter int unsigned FRAC = 0,
  parameter int unsigned W    = 18,
  parameter int unsigned FC   = 3,
  parameter int unsigned IOPS = 3,
  parameter int unsigned L    = 4
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int NUM_IO = 2 * (ROWS + COLS) * IOPS;
  localparam int IOB    = io_cfg_bits(W, IOPS);
  localparam int CFGB   = fabric_cfg_bits(K, N, FRAC, W, FC, L, ROWS, COLS, IOPS);
  localparam int XS     = xbar_sel_bits(K, N, FRAC);
  localparam int BB     = ble_cfg_bits(K, FRAC);
  localparam int CS     = cb_sel_bits(FC);
  localparam int IS     = io_sel_bits(W);
  localparam int PA     = io_index(SIDE_W, 0, ROWS, COLS) * IOPS;   // pads a, b
  localparam int PQ     = io_index(SIDE_E, 0, ROWS, COLS) * IOPS;   // output pad

  logic clk = 0, rst_n = 0, prog_en = 1, prog_din = 0, prog_dout;
  logic [NUM_IO-1:0] pad_in = '0, pad_out, pad_oe;
  logic [CFGB-1:0]   bs;

  efpga_fabric #(.ROWS(ROWS), .COLS(COLS), .K(K), .N(N), .FRAC(FRAC), .W(W), .FC_IN(FC),
                 .L(L), .IO_PER_SIDE(IOPS)) dut (
    .clk, .rst_n, .prog_en, .prog_din, .prog_dout, .pad_in, .pad_out, .pad_oe);

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %0dx%0d N=%0d FRAC=%0d W=%0d: %s got=%b exp=%b",
               ROWS, COLS, N, FRAC, W, what, got, exp);
    end
  endtask

  task automatic setf(input int off, input int w, input int val);
    for (int i = 0; i < w; i++) bs[off + i] = val[i];
  endtask

  task automatic build(input bit registered);
    int b0, clb0;
    bs   = '0;
    b0   = tile_base(K, N, FRAC, W, FC, L, 0, 0, ROWS, COLS);
    clb0 = b0 + tile_off_clb(K, N, FC);
    setf(b0 + 0 * CS, CS, 0);                 // horizontal CB pin 0 <- west track 0
    setf(b0 + 1 * CS, CS, 0);                 // horizontal CB pin 1 <- west track 1
    for (int b = 0; b < N; b++) begin
      int tt;
      for (int k = 0; k < K; k++)
        setf(clb0 + (b * K + k) * XS, XS, k % 2);   // inputs: pin 0, pin 1, pin 0, ...
      tt = 0;
      for (int i = 0; i < 2 ** K; i++) tt[i] = i[0] ^ i[1];
      setf(clb0 + xbar_cfg_bits(K, N, FRAC) + b * BB, 2 ** K, tt);
      for (int r = 0; r <= int'(FRAC); r++)
        bs[clb0 + xbar_cfg_bits(K, N, FRAC) + b * BB + 2 ** K + FRAC + r] = registered;
    end
    if (!sb_drives(int'(SIDE_E), 0, L, 0, 0, ROWS, COLS)) begin
      failures++;
      $display("FAIL no wire starts east on track 0 in tile (0,0)");
    end
    setf(b0 + tile_off_sb(K, N, FRAC, FC) + sb_field(int'(SIDE_E), 0, W, L, 0, 0, ROWS, COLS),
         SB_SEL_BITS, 3);                     // east track 0 <- a logic-block output
    setf(tile_base(K, N, FRAC, W, FC, L, 0, ROWS, ROWS, COLS) +
         io_index(SIDE_E, 0, ROWS, COLS) * IOB, IS, 0);          // east pad 0 <- track 0
    bs[tile_base(K, N, FRAC, W, FC, L, 0, ROWS, ROWS, COLS) +
       io_index(SIDE_E, 0, ROWS, COLS) * IOB + IS] = 1'b1;
  endtask

  task automatic load(input bit readback, input logic [CFGB-1:0] old);
    @(negedge clk);
    prog_en = 1;
    for (int i = CFGB - 1; i >= 0; i--) begin
      if (readback) check(prog_dout, old[i], "readback");
      prog_din = bs[i];
      @(negedge clk);
    end
    prog_en = 0;
  endtask

  initial begin
    logic [CFGB-1:0] first;
    logic            prev;
    done = 0; checks = 0; failures = 0;
    $display("fabric %0dx%0d K%0dN%0d FRAC=%0d W=%0d: %0d pads, %0d bitstream bits",
             ROWS, COLS, K, N, FRAC, W, NUM_IO, CFGB);
    build(1'b0);
    load(1'b0, '0);
    first = bs;
    rst_n = 1;
    for (int c = 0; c < 40; c++) begin
      @(negedge clk);
      pad_in = NUM_IO'({$urandom, $urandom});
      #1;
      check(pad_out[PQ], pad_in[PA] ^ pad_in[PA + 1], "combinational a^b");
      check(pad_oe[PQ], 1'b1, "output enable");
    end
    build(1'b1);
    load(1'b1, first);
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    prev = pad_in[PA] ^ pad_in[PA + 1];       // captured at the next rising edge
    for (int c = 0; c < 40; c++) begin
      @(negedge clk);
      #1;
      check(pad_out[PQ], prev, "registered a^b");
      pad_in = NUM_IO'({$urandom, $urandom});
      prev = pad_in[PA] ^ pad_in[PA + 1];
    end
    done = 1;
  end
endmodule
