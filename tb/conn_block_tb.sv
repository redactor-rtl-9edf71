// conn_block_tb -- checks the connection block's track choice for every pin.
//
// Pin p with select j must show channel track (p + j*floor(W/FC_IN)) mod W;
// the expected track is computed here for random selects and channel values.
module conn_block_tb;
  localparam int W = 18, PINS = 3, FC = 3, CS = 2;
  int checks = 0, failures = 0;
  logic [PINS*CS-1:0] cfg;
  logic [W-1:0]       chan;
  logic [PINS-1:0]    pins;

  conn_block #(.W(W), .PINS(PINS), .FC_IN(FC)) dut (.cfg, .chan, .pins);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 400; r++) begin
      cfg  = (PINS*CS)'($urandom);
      chan = W'($urandom);
      #1;
      for (int p = 0; p < PINS; p++) begin
        int j;
        logic e;
        j = int'((cfg >> (p * CS)) & 3);
        e = (j < FC) ? chan[(p + j * 6) % W] : 1'b0;
        checks++;
        if (pins[p] !== e) begin
          failures++;
          $display("FAIL pin %0d sel %0d got=%b exp=%b", p, j, pins[p], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
