// input_register -- PE-buffer input register.
//
// Holds the input vector of the PE (N_IN signed 8-bit activations, in their
// original, not reordered, order). It is filled one byte per cycle through
// `we`/`waddr`/`wdata` by the global controller and read in full, in
// parallel, by the input decoder, which picks from it the inputs each CU
// needs. The published design names the block; the byte-wide write port is
// this design's choice.
module input_register
  import rram_pkg::*;
(
  input  logic                 clk,
  input  logic                 we,
  input  logic [IN_AW-1:0]     waddr,
  input  logic [A_BITS-1:0]    wdata,
  output logic [A_BITS-1:0]    data [N_IN]
);

  always_ff @(posedge clk) begin
    if (we) data[waddr] <= wdata;
  end

endmodule
