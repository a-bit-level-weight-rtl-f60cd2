// input_decoder -- input routing of the PE controller.
//
// The reordering places the rows of each CU's bit-plane in a new order (and
// drops all-zero rows), and because of bit splitting each of the eight CUs
// has its own order. The decoder holds eight tables of row indexes, one
// row_map_t per physical crossbar row of each CU (valid bit + logical input
// row). After `start` it walks the physical rows r = 0..XBAR_ROWS-1, one per
// cycle, and writes into every IR-CU k the input  in_data[map[k][r].idx],
// or 0 for an unused row. `done` pulses in the cycle after the last write, so
// a load takes XBAR_ROWS + 1 cycles.
//
// The tables are programmed through `map_we`/`map_cu`/`map_row`/`map_wdata`.
// As published: the decoder fetches inputs from the PE buffer, reorders them
// by 8 sets of row indexes and distributes them to 8 CUs. The one-row-per-
// cycle schedule and the table storage are this design's choices.
module input_decoder
  import rram_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          map_we,
  input  logic [$clog2(N_CU)-1:0]       map_cu,
  input  logic [$clog2(XBAR_ROWS)-1:0]  map_row,
  input  row_map_t                      map_wdata,
  input  logic                          start,
  input  logic [A_BITS-1:0]             in_data [N_IN],
  output logic                          busy,
  output logic                          done,
  output logic [N_CU-1:0]               ir_we,
  output logic [$clog2(XBAR_ROWS)-1:0]  ir_row,
  output logic [A_BITS-1:0]             ir_wdata [N_CU]
);

  row_map_t map [N_CU][XBAR_ROWS];
  logic [$clog2(XBAR_ROWS)-1:0] row_q;

  always_ff @(posedge clk) begin
    if (map_we) map[map_cu][map_row] <= map_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      row_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          row_q <= '0;
        end
      end else begin
        row_q <= row_q + 1'b1;
        if (32'(row_q) == XBAR_ROWS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign ir_row = row_q;
  always_comb begin
    for (int k = 0; k < N_CU; k++) begin
      ir_we[k]    = busy;
      ir_wdata[k] = map[k][row_q].valid ? in_data[map[k][row_q].idx] : '0;
    end
  end

endmodule
