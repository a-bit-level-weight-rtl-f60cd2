// compute_crossbar -- BEHAVIOURAL MODEL of the 128x128 RRAM computation
// crossbar of one computation unit, including its 1-bit wordline DACs.
//
// Each cell stores one bit (low/high conductance). In a compute cycle only
// one operation unit (OU) is active: the 7 wordlines of OU row `ou_row` are
// driven by the 1-bit DACs with the current input bit-plane `wl_bits`, and the
// 8 bitlines of OU column `ou_col` are read. The current of bitline c is
// the sum over the active rows of wl_bits[i] * G(cell) * V_READ, returned here
// in units of one ON-cell current, so an ideal column gives a whole number
// 0..7. A non-zero OFF current can be set with I_OFF to model a finite on/off
// ratio. The model is analog in nature and uses `real`; it is not meant for
// synthesis.
//
// Programming: `prog_we` writes the 128 bits `prog_data` into crossbar row
// `prog_row` at the rising clock edge (write-verify and timing of real RRAM
// programming are not modelled). The read is combinational: the currents
// follow wl_bits/ou_row/ou_col within the same cycle and are sampled by the
// ADCs at the next edge.
//
// Follows the published design: 1 bit per cell, 128x128 crossbar, 7x8 OU,
// only one OU active per cycle. The current unit and the I_OFF knob are this
// model's own choices.
module compute_crossbar
  import rram_pkg::*;
#(
  parameter real I_ON  = 1.0,   // cell current with WL on and cell in low-resistance state
  parameter real I_OFF = 0.0    // cell current with WL on and cell in high-resistance state
) (
  input  logic                          clk,
  // programming port
  input  logic                          prog_we,
  input  logic [$clog2(XBAR_ROWS)-1:0]  prog_row,
  input  logic [XBAR_COLS-1:0]          prog_data,
  // compute port
  input  ou_row_t                       ou_row,
  input  ou_col_t                       ou_col,
  input  logic [OU_H-1:0]               wl_bits,     // DAC inputs of the active OU rows
  output real                           bl_current [OU_W]
);

  logic [XBAR_COLS-1:0] cells [XBAR_ROWS];

  always_ff @(posedge clk) begin
    if (prog_we) cells[prog_row] <= prog_data;
  end

  always_comb begin
    for (int c = 0; c < OU_W; c++) begin
      bl_current[c] = 0.0;
      for (int i = 0; i < OU_H; i++) begin
        if (wl_bits[i]) begin
          if (cells[int'(ou_row) * OU_H + i][int'(ou_col) * OU_W + c])
            bl_current[c] = bl_current[c] + I_ON;
          else
            bl_current[c] = bl_current[c] + I_OFF;
        end
      end
    end
  end

endmodule
