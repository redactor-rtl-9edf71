// cfg_chain -- configuration scan chain: the fabric's bitstream storage.
//
// A LEN-bit shift register. While prog_en is high it shifts one bit per clock,
// din entering at q[0] and q[LEN-1] leaving on dout; otherwise it holds, and
// q[] drives the LUT contents and mux selects of the logic it configures.
// After LEN shifts the first bit sent sits in q[LEN-1], so a bitstream is
// sent most significant bit first. Chains of several modules are daisy-chained
// dout -> din.
//
// The paper's fabrics are programmed through a chain of DFFs ("the DFFs found
// in the scan chain"); shifting on the user clock with an enable, and having no
// reset, are this design's choices.
module cfg_chain #(
  parameter int unsigned LEN = 8
) (
  input  logic           clk,
  input  logic           prog_en,
  input  logic           din,
  output logic           dout,
  output logic [LEN-1:0] q
);
  if (LEN == 1) begin : g_one
    always_ff @(posedge clk)
      if (prog_en) q <= din;
  end else begin : g_many
    always_ff @(posedge clk)
      if (prog_en) q <= {q[LEN-2:0], din};
  end

  assign dout = q[LEN-1];
endmodule
