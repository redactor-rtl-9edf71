// conn_block -- connection block: links CLB input pins to a routing channel.
//
// Each of the PINS outputs is a mux over FC_IN tracks of the W-track channel
// beside the CLB: pin p may take track (p + j*floor(W/FC_IN)) mod W for
// j = 0..FC_IN-1 (select j; select values >= FC_IN give 0). Spreading the
// candidates this way lets neighbouring pins reach different tracks.
// Combinational. Configuration: pin p's select at bits [p*CS +: CS].
//
// The fraction of tracks per pin comes from Fc_in = 0.15 (FC_IN = ceil(0.15*W));
// the track pattern is this design's choice.
module conn_block
  import efpga_pkg::*;
#(
  parameter int unsigned W     = 18,
  parameter int unsigned PINS  = 3,
  parameter int unsigned FC_IN = 3,
  localparam int unsigned CS   = cb_sel_bits(FC_IN),
  localparam int unsigned CFG  = PINS * CS
) (
  input  logic [CFG-1:0]  cfg,
  input  logic [W-1:0]    chan,
  output logic [PINS-1:0] pins
);
  for (genvar p = 0; p < PINS; p++) begin : g_pin
    logic [FC_IN-1:0] cand;
    for (genvar j = 0; j < FC_IN; j++) begin : g_c
      assign cand[j] = chan[cb_track(p, j, W, FC_IN)];
    end
    cfg_mux #(.NIN(FC_IN), .SW(CS)) u_mux (
      .data(cand),
      .sel (cfg[p*CS +: CS]),
      .y   (pins[p])
    );
  end
endmodule
