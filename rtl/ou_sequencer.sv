// ou_sequencer -- walks the operation units of the crossbars in one of two
// orders chosen by `direction`.
//
// Inputs are applied bit-serially, LSB first, so the outer loop runs over the
// A_BITS input bits. For each input bit every used OU is visited once:
//   horizontal: OU row by OU row, all OU columns of a row in turn. The
//               wordline vector stays the same while the columns change, but
//               the ADCs must be switched to a new group of bitlines.
//   vertical:   OU column by OU column, all OU rows of a column in turn. The
//               ADCs stay on the same bitlines, the wordline vector changes
//               every cycle.
// Only the n_rows x n_cols OUs at the top left are visited (the region a
// compressed mapping occupies). One OU is issued per cycle; the number of
// cycles is A_BITS * n_rows * n_cols, at most 8 * 18 * 16 = 2304, the bound
// given for the design.
//
// Interface: `start` (one cycle, while idle) latches direction, n_rows and
// n_cols; then `valid` is high for one OU per cycle with `in_bit`, `ou_row`,
// `ou_col`; `wl_reuse` marks a cycle whose wordline vector equals that of
// the cycle before; `last` marks the final OU; `busy` is high meanwhile.
// The two orders follow the published design; the loop nesting (bit
// outermost) and the region bounds are this design's choices.
module ou_sequencer
  import rram_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  direction_e direction,
  input  logic [$clog2(OU_ROWS+1)-1:0] n_rows,   // 1..OU_ROWS
  input  logic [$clog2(OU_COLS+1)-1:0] n_cols,   // 1..OU_COLS
  output logic       busy,
  output logic       valid,
  output in_bit_t    in_bit,
  output ou_row_t    ou_row,
  output ou_col_t    ou_col,
  output logic       wl_reuse,
  output logic       last
);

  direction_e dir_q;
  logic [$clog2(OU_ROWS+1)-1:0] nr_q;
  logic [$clog2(OU_COLS+1)-1:0] nc_q;
  logic first_q;

  logic row_end, col_end, bit_end;
  assign row_end = (32'(ou_row) + 1 >= 32'(nr_q));
  assign col_end = (32'(ou_col) + 1 >= 32'(nc_q));
  assign bit_end = (32'(in_bit) == A_BITS - 1);

  assign valid    = busy;
  assign last     = busy && bit_end && row_end && col_end;
  assign wl_reuse = busy && !first_q && (dir_q == DIR_HORIZONTAL) && (ou_col != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      dir_q   <= DIR_HORIZONTAL;
      nr_q    <= '0;
      nc_q    <= '0;
      in_bit  <= '0;
      ou_row  <= '0;
      ou_col  <= '0;
      first_q <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        busy    <= 1'b1;
        dir_q   <= direction;
        nr_q    <= n_rows;
        nc_q    <= n_cols;
        in_bit  <= '0;
        ou_row  <= '0;
        ou_col  <= '0;
        first_q <= 1'b1;
      end
    end else begin
      first_q <= 1'b0;
      if (last) begin
        busy <= 1'b0;
      end else if (dir_q == DIR_HORIZONTAL) begin
        if (!col_end) ou_col <= ou_col + 1'b1;
        else begin
          ou_col <= '0;
          if (!row_end) ou_row <= ou_row + 1'b1;
          else begin
            ou_row <= '0;
            in_bit <= in_bit + 1'b1;
          end
        end
      end else begin
        if (!row_end) ou_row <= ou_row + 1'b1;
        else begin
          ou_row <= '0;
          if (!col_end) ou_col <= ou_col + 1'b1;
          else begin
            ou_col <= '0;
            in_bit <= in_bit + 1'b1;
          end
        end
      end
    end
  end

  // start is only honoured while idle; n_rows/n_cols must select at least one OU
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && !busy) |-> (n_rows != 0 && n_cols != 0 &&
                                         32'(n_rows) <= OU_ROWS && 32'(n_cols) <= OU_COLS));

endmodule
