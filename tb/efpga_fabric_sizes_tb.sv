// efpga_fabric_sizes_tb -- builds the fabric in each of the eight sizes the
// redaction study chose for its three controllers and its PE controller, and
// checks each one after programming (see fabric_size_check).
//
// Sizes (grid, BLEs per block, fracturable or not, channel width), with
// FC_IN = ceil(0.15*W) and the fewest pads per I/O block that hold the
// block's I/Os (3 for 20 I/Os, 4 for 15 and 26, 2 for 5):
//   2x2 K4N2 W18, 2x2 K4_frac_N1 W18, 1x1 K4N6 W26, 1x1 K4_frac_N3 W18,
//   2x2 K4N4 W30, 2x2 K4_frac_N3 W30, 1x1 K4N1 W6, 1x1 K4_frac_N1 W14.
// A ninth instance is a 4x4 grid of the default tile, the size of the
// architecture's example drawing: there the output wire spans all four
// columns unswitched, a full length-4 wire.
// The controllers' own netlists are not available, so each fabric runs the
// same small function through its logic, routing, I/O and chain instead.
// Ends when every instance is done, or at the watchdog.
module efpga_fabric_sizes_tb;
  localparam int NCFG = 9;
  logic done [NCFG];
  int   c    [NCFG];
  int   f    [NCFG];

  fabric_size_check #(.ROWS(2), .COLS(2), .N(2), .FRAC(0), .W(18), .FC(3), .IOPS(3)) u0 (.done(done[0]), .checks(c[0]), .failures(f[0]));
  fabric_size_check #(.ROWS(2), .COLS(2), .N(1), .FRAC(1), .W(18), .FC(3), .IOPS(3)) u1 (.done(done[1]), .checks(c[1]), .failures(f[1]));
  fabric_size_check #(.ROWS(1), .COLS(1), .N(6), .FRAC(0), .W(26), .FC(4), .IOPS(4)) u2 (.done(done[2]), .checks(c[2]), .failures(f[2]));
  fabric_size_check #(.ROWS(1), .COLS(1), .N(3), .FRAC(1), .W(18), .FC(3), .IOPS(4)) u3 (.done(done[3]), .checks(c[3]), .failures(f[3]));
  fabric_size_check #(.ROWS(2), .COLS(2), .N(4), .FRAC(0), .W(30), .FC(5), .IOPS(4)) u4 (.done(done[4]), .checks(c[4]), .failures(f[4]));
  fabric_size_check #(.ROWS(2), .COLS(2), .N(3), .FRAC(1), .W(30), .FC(5), .IOPS(4)) u5 (.done(done[5]), .checks(c[5]), .failures(f[5]));
  fabric_size_check #(.ROWS(1), .COLS(1), .N(1), .FRAC(0), .W(6),  .FC(1), .IOPS(2)) u6 (.done(done[6]), .checks(c[6]), .failures(f[6]));
  fabric_size_check #(.ROWS(1), .COLS(1), .N(1), .FRAC(1), .W(14), .FC(3), .IOPS(2)) u7 (.done(done[7]), .checks(c[7]), .failures(f[7]));
  fabric_size_check #(.ROWS(4), .COLS(4), .N(2), .FRAC(0), .W(18), .FC(3), .IOPS(3)) u8 (.done(done[8]), .checks(c[8]), .failures(f[8]));

  int checks, failures;

  function automatic bit all_done();
    for (int i = 0; i < NCFG; i++) if (!done[i]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic report();
    checks = 0;
    failures = 0;
    for (int i = 0; i < NCFG; i++) begin
      checks += c[i];
      failures += f[i];
      if (!done[i]) failures++;
      $display("size %0d: done=%0b checks=%0d failures=%0d", i, done[i], c[i], f[i]);
    end
  endtask

  initial begin
    #200000;
    $display("watchdog expired");
    report();
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    while (!all_done()) #10;
    report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
