// cfg_mux -- programmable multiplexer, the switch used throughout the fabric's routing.
//
// Output = data[sel] for sel < NIN, and constant 0 for larger select values,
// so an unused mux can be parked at a known level. Purely combinational.
// The paper builds its crossbar and routing out of programmable multiplexers;
// the out-of-range-gives-0 rule is this design's choice.
// Circuit warning: lint tools flag a possible combinational loop through
// this mux's output (UNOPTFLAT). In a fabric the routing muxes can be set to
// form rings, as in any FPGA; the loops are only closed by a bitstream, and
// the bitstreams used here never close one.
module cfg_mux #(
  parameter int unsigned NIN = 4,
  parameter int unsigned SW  = (NIN <= 1) ? 1 : $clog2(NIN)
) (
  input  logic [NIN-1:0] data,
  input  logic [SW-1:0]  sel,
  output logic           y
);
  always_comb begin
    y = 1'b0;
    for (int unsigned i = 0; i < NIN; i++)
      if (sel == SW'(i)) y = data[i];
  end
endmodule
