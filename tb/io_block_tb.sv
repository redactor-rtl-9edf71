// io_block_tb -- checks both directions of an I/O block.
//
// Incoming track t must carry pad input t mod IO_PER_SIDE; pad p must output
// the outgoing track named by its select and show its output-enable bit.
module io_block_tb;
  localparam int W = 18, H = 9, IOPS = 3, S = 4;
  int checks = 0, failures = 0;
  logic [IOPS*(S+1)-1:0] cfg;
  logic [IOPS-1:0] pad_in, pad_out, pad_oe;
  logic [H-1:0]    from_f, to_f;

  io_block #(.W(W), .IO_PER_SIDE(IOPS)) dut (
    .cfg, .pad_in, .pad_out, .pad_oe, .trk_from_fabric(from_f), .trk_to_fabric(to_f));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%b exp=%b", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 300; r++) begin
      cfg    = (IOPS*(S+1))'($urandom);
      pad_in = IOPS'($urandom);
      from_f = H'($urandom);
      #1;
      for (int t = 0; t < H; t++) check(to_f[t], pad_in[t % IOPS], "to fabric");
      for (int p = 0; p < IOPS; p++) begin
        int s;
        s = int'((cfg >> (p * (S + 1))) & 15);
        check(pad_out[p], (s < H) ? from_f[s] : 1'b0, "pad out");
        check(pad_oe[p], cfg[p * (S + 1) + S], "pad oe");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
