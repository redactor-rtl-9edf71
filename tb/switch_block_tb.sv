// switch_block_tb -- checks every outgoing track of a switch block with length-4 wires.
//
// The block sits at tile (1,0) of a 2x2 grid, so the wire starts differ from
// side to side. Worked out here: a track leaving side d starts a wire, and is
// switchable, when (p + t) mod 4 == 0, with p = y, x, 1-y, 1-x for N, E, S, W.
// A switchable track follows its 2-bit select (0 straight, 1 from the next
// side clockwise, 2 from the previous one, 3 CLB output (t/4+d) mod 2); the
// selects are packed in track order. Every other track must copy the
// same-index track arriving from the opposite side.
module switch_block_tb;
  localparam int W = 18, H = 9, O = 2, L = 4, X = 1, Y = 0, R = 2, C = 2;
  localparam int NDRV = 10;                       // 3+2+2+3 switchable tracks
  int checks = 0, failures = 0;
  int straight = 0, turns = 0, clb = 0, pass = 0;
  logic [NDRV*2-1:0] cfg;
  logic [3:0][H-1:0] trk_in, trk_out;
  logic [O-1:0]      clb_out;

  switch_block #(.W(W), .O(O), .L(L), .X(X), .Y(Y), .ROWS(R), .COLS(C)) dut (.cfg, .trk_in, .clb_out, .trk_out);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pos[4];
    pos[0] = Y; pos[1] = X; pos[2] = R - 1 - Y; pos[3] = C - 1 - X;
    for (int r = 0; r < 300; r++) begin
      int f;
      cfg     = (NDRV*2)'($urandom);
      trk_in  = {$urandom, $urandom};
      clb_out = O'($urandom);
      #1;
      f = 0;
      for (int d = 0; d < 4; d++)
        for (int t = 0; t < H; t++) begin
          logic e;
          if ((pos[d] + t) % L == 0) begin
            int s;
            s = int'((cfg >> (f * 2)) & 3);
            f++;
            case (s)
              0: begin e = trk_in[(d + 2) % 4][t]; straight++; end
              1: begin e = trk_in[(d + 1) % 4][t]; turns++;    end
              2: begin e = trk_in[(d + 3) % 4][t]; turns++;    end
              default: begin e = clb_out[(t / L + d) % O]; clb++; end
            endcase
          end else begin
            e = trk_in[(d + 2) % 4][t];
            pass++;
          end
          checks++;
          if (trk_out[d][t] !== e) begin
            failures++;
            $display("FAIL side %0d track %0d got=%b exp=%b", d, t, trk_out[d][t], e);
          end
        end
      if (f != NDRV) begin
        failures++;
        $display("FAIL %0d switchable tracks, expected %0d", f, NDRV);
      end
    end
    if (straight == 0 || turns == 0 || clb == 0 || pass == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
