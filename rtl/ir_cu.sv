// ir_cu -- input register of one computation unit (the 128-byte CU buffer).
//
// Holds one 8-bit input per physical crossbar row, already reordered by the
// input decoder so that row r carries the input of the logical row mapped to
// crossbar row r of this CU. Inputs are fed to the crossbar bit-serially: for
// the active OU row `ou_row` and input bit `in_bit` the module presents the
// OU_H wordline bits  wl_bits[i] = data[ou_row*OU_H + i][in_bit].
//
// Interface: a write port (`we`, `row`, `wdata`) loaded one row per cycle by
// the input decoder; a combinational read of the wordline bits of the active
// OU. 128 rows x 8 bits = 128 B, the CU buffer size of the published design.
// The OU sequencer outside this block chooses the OU order (horizontal or
// vertical); the buffer itself only needs the OU height, a package constant.
module ir_cu
  import rram_pkg::*;
(
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(XBAR_ROWS)-1:0] row,
  input  logic [A_BITS-1:0]            wdata,
  input  ou_row_t                      ou_row,
  input  in_bit_t                      in_bit,
  output logic [OU_H-1:0]              wl_bits
);

  logic [A_BITS-1:0] data [XBAR_ROWS];

  always_ff @(posedge clk) begin
    if (we) data[row] <= wdata;
  end

  always_comb begin
    for (int i = 0; i < OU_H; i++)
      wl_bits[i] = data[int'(ou_row) * OU_H + i][in_bit];
  end

endmodule
