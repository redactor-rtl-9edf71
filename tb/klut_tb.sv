// klut_tb -- checks the plain and fracturable look-up tables exhaustively.
//
// For random truth tables it applies every input vector and compares each
// output with the truth-table bit worked out here: plain LUT and FLUT in
// K-LUT mode read bit {in}; a fractured FLUT reads bits {0,in[K-2:0]} and
// {1,in[K-2:0]} on its two outputs.
module klut_tb;
  localparam int K = 4;
  int checks = 0, failures = 0;

  logic [(1<<K)-1:0] tt;
  logic              frac;
  logic [K-1:0]      in;
  logic [0:0]        out_l;
  logic [1:0]        out_f;

  klut #(.K(K), .FRAC(0)) u_lut  (.cfg_lut(tt), .cfg_frac(1'b0), .lut_in(in), .lut_out(out_l));
  klut #(.K(K), .FRAC(1)) u_flut (.cfg_lut(tt), .cfg_frac(frac), .lut_in(in), .lut_out(out_f));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s tt=%h in=%b frac=%b got=%b exp=%b", what, tt, in, frac, got, exp);
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
    for (int r = 0; r < 20; r++) begin
      tt = (r == 0) ? 16'h6996 : 16'($urandom);
      for (int m = 0; m < 2; m++) begin
        frac = m[0];
        for (int v = 0; v < (1 << K); v++) begin
          in = v[K-1:0];
          #1;
          check(out_l[0], (tt >> v) & 1, "lut");
          if (!frac) begin
            check(out_f[0], (tt >> v) & 1, "flut k-mode out0");
          end else begin
            check(out_f[0], (tt >> (v % 8)) & 1, "flut frac out0");
            check(out_f[1], (tt >> (8 + v % 8)) & 1, "flut frac out1");
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
