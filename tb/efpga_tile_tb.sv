// efpga_tile_tb -- programs one tile through its scan chain and checks the mapped logic.
//
// The tile is the south-west tile of a 2x2 grid (K = 4, N = 2, W = 18,
// length-4 wires). Wires leaving north or east start at tracks 0, 4, 8 and
// wires leaving south or west at 3, 7, so the switch block holds 10 two-bit
// selects, in the order N0 N4 N8 E0 E4 E8 S3 S7 W3 W7. The 90-bit
// configuration is built here field by field:
//   BLE 0: combinational AND of horizontal-CB pin 0 (west track 0) and
//          vertical-CB pin 0 (south track 0), driven east on track 4;
//   BLE 1: registered XOR of horizontal-CB pin 1 (east track 4, the upper half
//          of the channel) and vertical-CB pin 1 (south track 7), driven north on track 4;
//   routing: north track 0 straight from south track 0, west track 3 turned
//          from north track 3; tracks with no wire start pass straight through.
// Random track values are then applied and the outputs compared with the
// expected functions, the XOR one clock late.
module efpga_tile_tb;
  localparam int W = 18, H = 9, L = 90;
  localparam int OFF_Y = 6, OFF_C = 12, XB = 24, BB = 17, OFF_S = 70;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, prog_en = 1, prog_din = 0, prog_dout;
  logic [3:0][H-1:0] trk_in, trk_out;
  logic [L-1:0] bs;
  logic         xor_ref;

  efpga_tile dut (.clk, .rst_n, .prog_en, .prog_din, .prog_dout, .trk_in, .trk_out);

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t got=%b exp=%b", what, $time, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // switch-block field number k (N0 N4 N8 E0 E4 E8 S3 S7 W3 W7) at OFF_S + 2k
  function automatic int sbf(input int k);
    return OFF_S + k * 2;
  endfunction

  initial begin
    bs = '0;
    bs[0 +: 2]        = 2'd0;   // CBX pin 0 <- chan_x[0]  = west track 0
    bs[2 +: 2]        = 2'd2;   // CBX pin 1 <- chan_x[13] = east track 4
    bs[OFF_Y + 0 +: 2] = 2'd0;  // CBY pin 0 <- chan_y[0]  = south track 0
    bs[OFF_Y + 2 +: 2] = 2'd1;  // CBY pin 1 <- chan_y[7]  = south track 7
    // crossbar (3-bit selects): BLE0 = pins 0,3,0,0 ; BLE1 = pins 1,4,1,1
    bs[OFF_C + 0 +: 3] = 3'd0; bs[OFF_C + 3 +: 3] = 3'd3; bs[OFF_C + 6 +: 3] = 3'd0; bs[OFF_C + 9 +: 3] = 3'd0;
    bs[OFF_C + 12 +: 3] = 3'd1; bs[OFF_C + 15 +: 3] = 3'd4; bs[OFF_C + 18 +: 3] = 3'd1; bs[OFF_C + 21 +: 3] = 3'd1;
    bs[OFF_C + XB +: 16]      = 16'h8888;   // in0 & in1
    bs[OFF_C + XB + 16]       = 1'b0;
    bs[OFF_C + XB + BB +: 16] = 16'h6666;   // in0 ^ in1
    bs[OFF_C + XB + BB + 16]  = 1'b1;
    bs[sbf(4) +: 2] = 2'd3;      // east 4  <- CLB output (4/4+1)%2 = 0
    bs[sbf(1) +: 2] = 2'd3;      // north 4 <- CLB output (4/4+0)%2 = 1
    bs[sbf(0) +: 2] = 2'd0;      // north 0 <- south 0 (straight)
    bs[sbf(8) +: 2] = 2'd1;      // west 3  <- side (3+1)%4 = north, track 3
    trk_in = '0;
    @(negedge clk);
    prog_en = 1;
    for (int i = L - 1; i >= 0; i--) begin
      prog_din = bs[i];
      @(negedge clk);
    end
    prog_en = 0;
    rst_n = 1;
    xor_ref = 1'b0;
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      trk_in = {$urandom, $urandom};
      #1;
      check(trk_out[1][4], trk_in[3][0] & trk_in[2][0], "and east");
      check(trk_out[0][4], xor_ref, "xor north");
      check(trk_out[0][0], trk_in[2][0], "straight");
      check(trk_out[3][3], trk_in[0][3], "turn");
      check(trk_out[2][0], trk_in[0][0], "wire passing south");
      check(trk_out[1][1], trk_in[3][1], "wire passing east");
      @(posedge clk);
      xor_ref = trk_in[1][4] ^ trk_in[2][7];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
