// clb -- configurable logic block: a cluster of N BLEs behind a local crossbar.
//
// The block has I = K(N+1)/2 input pins. The crossbar (clb_xbar) feeds each
// BLE's K inputs from those pins or from the cluster's own BLE outputs; the
// BLE outputs are the CLB's output pins, N of them for plain LUTs and 2N for
// fracturable LUTs (BLE b drives clb_out[b*(1+FRAC) +: 1+FRAC]).
// Configuration (LSB first): crossbar selects | BLE 0 | BLE 1 | ...
// Timing: combinational from pins to outputs through one LUT, or one clock
// through a BLE flip-flop; feedback through the crossbar can form longer paths.
// prog_en high holds all outputs at 0 (see ble).
// Lint reports clb_out as circular combinational logic: the crossbar can feed
// a BLE output back to a BLE input, which is what lets a cluster hold state
// or chain LUTs. Whether a loop is actually closed depends on the bitstream.
//
// Cluster size N, LUT size K and the input-count rule I = K(N+1)/2 follow the
// paper; the output pins being the BLE outputs directly is this design's choice.
module clb
  import efpga_pkg::*;
#(
  parameter int unsigned K    = 4,
  parameter int unsigned N    = 2,
  parameter int unsigned FRAC = 0,
  localparam int unsigned I   = clb_inputs(K, N),
  localparam int unsigned O   = clb_outputs(N, FRAC),
  localparam int unsigned CFG = clb_cfg_bits(K, N, FRAC)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           prog_en,
  input  logic [CFG-1:0] cfg,
  input  logic [I-1:0]   clb_in,
  output logic [O-1:0]   clb_out
);
  localparam int unsigned XB   = xbar_cfg_bits(K, N, FRAC);
  localparam int unsigned BB   = ble_cfg_bits(K, FRAC);
  localparam int unsigned NOUT = ble_outputs(FRAC);

  logic [N*K-1:0] ble_in;

  clb_xbar #(.K(K), .N(N), .FRAC(FRAC)) u_xbar (
    .cfg   (cfg[XB-1:0]),
    .clb_in(clb_in),
    .ble_fb(clb_out),
    .ble_in(ble_in)
  );

  for (genvar b = 0; b < N; b++) begin : g_ble
    ble #(.K(K), .FRAC(FRAC)) u_ble (
      .clk    (clk),
      .rst_n  (rst_n),
      .prog_en(prog_en),
      .cfg    (cfg[XB + b*BB +: BB]),
      .ble_in (ble_in[b*K +: K]),
      .ble_out(clb_out[b*NOUT +: NOUT])
    );
  end
endmodule
