// clb_tb -- checks a configured logic block (K = 4, N = 2) against a reference model.
//
// BLE 0 is set up as a combinational 3-input XOR of pins 0..2. BLE 1 is a
// registered set/reset flip-flop with enable: it reads its own output back
// through the crossbar, and pins 3, 4, 5 are set, reset and enable. The
// reference model here computes both from the pin values every clock.
module clb_tb;
  localparam int K = 4, N = 2, I = 6, XS = 3, XB = 24, BB = 17, CFG = 58;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, prog_en = 0;
  logic [CFG-1:0] cfg;
  logic [I-1:0]   clb_in;
  logic [1:0]     clb_out;
  logic           q_ref;

  clb #(.K(K), .N(N), .FRAC(0)) dut (.clk, .rst_n, .prog_en, .cfg, .clb_in, .clb_out);

  always #5 clk = ~clk;

  function automatic logic [15:0] tt_of(input int f);
    logic [15:0] t;
    for (int i = 0; i < 16; i++) begin
      logic a, s, r, e;
      a = i[0]; s = i[1]; r = i[2]; e = i[3];
      t[i] = (f == 0) ? (i[0] ^ i[1] ^ i[2])
                      : (e ? (s ? 1'b1 : (r ? 1'b0 : a)) : a);
    end
    return t;
  endfunction

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

  initial begin
    cfg = '0;
    // crossbar: BLE0 in0..3 = pins 0,1,2,0 ; BLE1 in0 = own output (index I+1 = 7), in1..3 = pins 3,4,5
    cfg[0*XS +: XS] = 3'd0; cfg[1*XS +: XS] = 3'd1; cfg[2*XS +: XS] = 3'd2; cfg[3*XS +: XS] = 3'd0;
    cfg[4*XS +: XS] = 3'd7; cfg[5*XS +: XS] = 3'd3; cfg[6*XS +: XS] = 3'd4; cfg[7*XS +: XS] = 3'd5;
    cfg[XB +: 16]        = tt_of(0);
    cfg[XB + 16]         = 1'b0;                 // BLE0 combinational
    cfg[XB + BB +: 16]   = tt_of(1);
    cfg[XB + BB + 16]    = 1'b1;                 // BLE1 registered
    clb_in = '0;
    q_ref  = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      clb_in = I'($urandom);
      #1;
      check(clb_out[0], clb_in[0] ^ clb_in[1] ^ clb_in[2], "xor");
      check(clb_out[1], q_ref, "ff");
      @(posedge clk);
      if (clb_in[5]) q_ref = clb_in[3] ? 1'b1 : (clb_in[4] ? 1'b0 : q_ref);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
