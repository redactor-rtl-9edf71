// ble_tb -- checks the basic logic element in both output modes.
//
// Two BLEs (plain and fracturable, K = 4) get random truth tables and inputs.
// In combinational mode the output must equal the truth-table bit at once;
// in registered mode it must equal the bit of the previous clock's inputs,
// and 0 right after reset. The expected values are computed from the truth
// table in this testbench. Finally prog_en must force the outputs to 0.
module ble_tb;
  import efpga_pkg::*;
  localparam int K = 4;
  localparam int C0 = ble_cfg_bits(K, 0);   // 16 + 1
  localparam int C1 = ble_cfg_bits(K, 1);   // 16 + 1 + 2

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, prog_en = 0;
  logic [C0-1:0] cfg0;
  logic [C1-1:0] cfg1;
  logic [K-1:0]  in;
  logic [0:0]    out0;
  logic [1:0]    out1;

  ble #(.K(K), .FRAC(0)) u_ble  (.clk, .rst_n, .prog_en, .cfg(cfg0), .ble_in(in), .ble_out(out0));
  ble #(.K(K), .FRAC(1)) u_fble (.clk, .rst_n, .prog_en, .cfg(cfg1), .ble_in(in), .ble_out(out1));

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got=%b exp=%b", what, $time, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] tt;
  logic        prev0, prev_lo, prev_hi;

  initial begin
    in = '0; cfg0 = '0; cfg1 = '0;
    repeat (2) @(posedge clk);
    // registered mode straight after reset: outputs 0
    tt = 16'hFFFF;
    cfg0 = {1'b1, tt};
    cfg1 = {2'b11, 1'b1, tt};
    #1;
    check(out0[0], 1'b0, "reset ble");
    check(out1[0], 1'b0, "reset fble0");
    check(out1[1], 1'b0, "reset fble1");
    @(negedge clk) rst_n = 1;

    for (int r = 0; r < 200; r++) begin
      logic regm, fr;
      int v;
      tt   = 16'($urandom);
      regm = 1'($urandom);
      fr   = 1'($urandom);
      cfg0 = {regm, tt};
      cfg1 = {regm, regm, fr, tt};
      @(negedge clk);
      v  = int'($urandom % 16);
      in = v[3:0];
      if (!regm) begin
        #1;
        check(out0[0], tt[v], "comb ble");
        check(out1[0], fr ? tt[v % 8] : tt[v], "comb fble0");
        check(out1[1], tt[8 + v % 8], "comb fble1");
      end else begin
        prev0   = tt[v];
        prev_lo = fr ? tt[v % 8] : tt[v];
        prev_hi = tt[8 + v % 8];
        @(posedge clk); #1;
        in = 4'($urandom);                  // new inputs must not reach the output
        #1;
        check(out0[0], prev0, "reg ble");
        check(out1[0], prev_lo, "reg fble0");
        check(out1[1], prev_hi, "reg fble1");
      end
    end
    // while the bitstream is shifted the outputs are held at 0
    cfg0 = {1'b0, 16'hFFFF};
    cfg1 = {2'b00, 1'b0, 16'hFFFF};
    prog_en = 1;
    #1;
    check(out0[0], 1'b0, "hold ble");
    check(out1[0], 1'b0, "hold fble0");
    check(out1[1], 1'b0, "hold fble1");
    prog_en = 0;
    #1;
    check(out0[0], 1'b1, "release ble");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
