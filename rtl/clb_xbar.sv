// clb_xbar -- local crossbar of a logic block.
//
// Every one of the N*K BLE inputs is a programmable mux over all I CLB input
// pins and all BLE outputs of the cluster (indices 0..I-1 pick a CLB input,
// I..I+O-1 pick BLE output i-I, larger values give 0). Feeding BLE outputs
// back lets a cluster chain LUTs and build state machines without leaving the
// CLB. Combinational.
// Configuration: the select of BLE b, input k at bits [(b*K+k)*XS +: XS].
//
// A fully populated crossbar matches the description that the crossbar
// connects every BLE with every CLB pin; the select encoding is this design's.
module clb_xbar
  import efpga_pkg::*;
#(
  parameter int unsigned K    = 4,
  parameter int unsigned N    = 2,
  parameter int unsigned FRAC = 0,
  localparam int unsigned I   = clb_inputs(K, N),
  localparam int unsigned O   = clb_outputs(N, FRAC),
  localparam int unsigned XS  = xbar_sel_bits(K, N, FRAC),
  localparam int unsigned CFG = xbar_cfg_bits(K, N, FRAC)
) (
  input  logic [CFG-1:0] cfg,
  input  logic [I-1:0]   clb_in,
  input  logic [O-1:0]   ble_fb,
  output logic [N*K-1:0] ble_in
);
  logic [I+O-1:0] cand;
  assign cand = {ble_fb, clb_in};

  for (genvar b = 0; b < N * K; b++) begin : g_mux
    cfg_mux #(.NIN(I + O), .SW(XS)) u_mux (
      .data(cand),
      .sel (cfg[b*XS +: XS]),
      .y   (ble_in[b])
    );
  end
endmodule
