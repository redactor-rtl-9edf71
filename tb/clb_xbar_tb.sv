// clb_xbar_tb -- checks that every BLE input of the local crossbar follows its select.
//
// Random selects and random pin values; the expected value of each BLE input
// is the CLB pin (select < I), the fed-back BLE output (I <= select < I+O) or
// 0 (larger select), worked out here.
module clb_xbar_tb;
  import efpga_pkg::*;
  localparam int K = 4, N = 2, FRAC = 0;
  localparam int I = 6, O = 2, XS = 3;      // K(N+1)/2 = 6, N outputs, ceil(log2(8))
  localparam int CFG = N * K * XS;

  int checks = 0, failures = 0;
  logic [CFG-1:0] cfg;
  logic [I-1:0]   clb_in;
  logic [O-1:0]   ble_fb;
  logic [N*K-1:0] ble_in;

  clb_xbar #(.K(K), .N(N), .FRAC(FRAC)) dut (.cfg, .clb_in, .ble_fb, .ble_in);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    if (clb_inputs(K, N) != I || xbar_cfg_bits(K, N, FRAC) != CFG) begin
      failures++;
      $display("FAIL size mismatch");
    end
    checks++;
    for (int r = 0; r < 500; r++) begin
      cfg    = CFG'({$urandom, $urandom});
      clb_in = I'($urandom);
      ble_fb = O'($urandom);
      #1;
      for (int b = 0; b < N * K; b++) begin
        int s;
        logic e;
        s = int'((cfg >> (b * XS)) & ((1 << XS) - 1));
        e = (s < I) ? clb_in[s] : ble_fb[s - I];
        checks++;
        if (ble_in[b] !== e) begin
          failures++;
          $display("FAIL ble input %0d sel=%0d got=%b exp=%b", b, s, ble_in[b], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
