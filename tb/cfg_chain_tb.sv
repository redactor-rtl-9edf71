// cfg_chain_tb -- checks loading, holding and shifting out of the configuration chain.
//
// Shifts a random word in most significant bit first and checks that q holds
// it after LEN clocks, that q does not move while prog_en is low, and that a
// second load returns the first word on dout bit by bit, MSB first.
module cfg_chain_tb;
  localparam int LEN = 37;
  int checks = 0, failures = 0;
  logic clk = 0, prog_en = 0, din = 0, dout;
  logic [LEN-1:0] q, w1, w2;

  cfg_chain #(.LEN(LEN)) dut (.clk, .prog_en, .din, .dout, .q);

  always #5 clk = ~clk;

  task automatic check(input logic [LEN-1:0] got, input logic [LEN-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w1 = LEN'({$urandom, $urandom});
    w2 = LEN'({$urandom, $urandom});
    @(negedge clk);
    prog_en = 1;
    for (int i = LEN - 1; i >= 0; i--) begin
      din = w1[i];
      @(negedge clk);
    end
    prog_en = 0;
    check(q, w1, "load");
    din = ~din;
    repeat (5) @(negedge clk);
    check(q, w1, "hold");
    prog_en = 1;
    for (int i = LEN - 1; i >= 0; i--) begin
      din = w2[i];
      check(LEN'(dout), LEN'(w1[i]), "shift out");
      @(negedge clk);
    end
    prog_en = 0;
    check(q, w2, "reload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
