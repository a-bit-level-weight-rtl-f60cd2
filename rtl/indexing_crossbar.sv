// indexing_crossbar -- BEHAVIOURAL MODEL of the indexing RRAM crossbar of a
// processing element and its one-bit sense amplifiers.
//
// Output indexing in this design is table driven: after reordering, the
// physical columns of an OU no longer line up with logical output columns,
// and a repetitive physical column feeds two of them. The indexing crossbar
// stores, in binary, one row per OU position (ou_row, ou_col): for each of the
// N_CU computation units an idx_entry_t (length + delta-encoded column
// indices, see rram_pkg). All eight CUs step through the same OU sequence, so
// one row read gives the entries of all eight. Each stored bit is read by a
// one-bit sense amplifier; here the read is modelled as an ideal synchronous
// memory read: `rd_en` with `rd_addr` returns the row on `rd_data` one cycle
// later. `wr_en` programs a row.
//
// As published: the column indices live in an RRAM crossbar read by one-bit
// readout, delta encoded, one list per OU. The row organisation (one OU of all
// CUs per row, N_CU*133 = 1064 bit cells per row, 288 rows) and the one-cycle
// read are this design's choices.
module indexing_crossbar
  import rram_pkg::*;
(
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [OU_AW-1:0]         wr_addr,
  input  idx_entry_t [N_CU-1:0]    wr_data,
  input  logic                     rd_en,
  input  logic [OU_AW-1:0]         rd_addr,
  output idx_entry_t [N_CU-1:0]    rd_data
);

  idx_entry_t [N_CU-1:0] mem [N_OU];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
