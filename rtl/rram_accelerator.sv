// rram_accelerator -- top level: an array of N_PE processing elements, the
// global buffer and the global controller.
//
// The host loads input activations into the global buffer through port A
// (`gb_*`), programs each PE's crossbars, indexing crossbar and row-index
// tables through the shared programming ports, selected by `prog_pe`
// (the weights and index lists come from the offline reordering and
// compression of each layer slice), sets each PE's `pe_cfg`, and starts a
// job with `start` (see global_controller for the job fields). When `done`
// pulses, the requantised outputs of every active PE are in the global
// buffer. `pe_acc` and `pe_stats` expose the PEs' raw accumulators and event
// counters for observation.
//
// Each PE stores one weight slice of up to 128 inputs x 128 outputs with its
// eight bits in eight CUs; layers larger than that are split over PEs and
// their partial results combined by the host (not done in hardware here).
// The number of PEs (16) follows the 4 x 4 array drawn for the design; no
// number is given for it. Buffer size and host interface are this design's
// choices.
module rram_accelerator
  import rram_pkg::*;
#(
  parameter int unsigned N_PE     = 16,
  parameter int unsigned GB_DEPTH = 65536
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host port of the global buffer
  input  logic                          gb_we,
  input  logic [$clog2(GB_DEPTH)-1:0]   gb_addr,
  input  logic [7:0]                    gb_wdata,
  output logic [7:0]                    gb_rdata,
  // programming (one PE at a time)
  input  logic [$clog2(N_PE)-1:0]       prog_pe,
  input  logic                          prog_we,
  input  logic [$clog2(N_CU)-1:0]       prog_cu,
  input  logic [$clog2(XBAR_ROWS)-1:0]  prog_row,
  input  logic [XBAR_COLS-1:0]          prog_data,
  input  logic                          idx_we,
  input  logic [OU_AW-1:0]              idx_addr,
  input  idx_entry_t [N_CU-1:0]         idx_wdata,
  input  logic                          map_we,
  input  logic [$clog2(N_CU)-1:0]       map_cu,
  input  logic [$clog2(XBAR_ROWS)-1:0]  map_row,
  input  row_map_t                      map_wdata,
  // job
  input  pe_cfg_t                       pe_cfg   [N_PE],
  input  logic                          start,
  input  logic [N_PE-1:0]               active,
  input  logic [$clog2(GB_DEPTH)-1:0]   in_base  [N_PE],
  input  logic [$clog2(GB_DEPTH)-1:0]   out_base [N_PE],
  input  logic [7:0]                    pool_len,
  output logic                          busy,
  output logic                          done,
  // observation
  output logic signed [ACC_W-1:0]       pe_acc   [N_PE][N_OUT],
  output pe_stats_t                     pe_stats [N_PE]
);

  logic                        b_we;
  logic [$clog2(GB_DEPTH)-1:0] b_addr;
  logic [7:0]                  b_wdata, b_rdata;
  logic [N_PE-1:0]             pe_in_we, pe_start, pe_done, pe_busy_unused;
  logic [IN_AW-1:0]            pe_in_addr;
  logic [A_BITS-1:0]           pe_in_wdata;
  logic                        pe_pool_first;
  logic signed [A_BITS-1:0]    pe_out [N_PE][N_OUT];

  global_buffer #(.DEPTH(GB_DEPTH)) u_gb (
    .clk, .a_we(gb_we), .a_addr(gb_addr), .a_wdata(gb_wdata), .a_rdata(gb_rdata),
    .b_we, .b_addr, .b_wdata, .b_rdata
  );

  global_controller #(.N_PE(N_PE), .GB_DEPTH(GB_DEPTH)) u_gc (
    .clk, .rst_n, .start, .active, .in_base, .out_base, .pool_len, .busy, .done,
    .gb_we(b_we), .gb_addr(b_addr), .gb_wdata(b_wdata), .gb_rdata(b_rdata),
    .pe_in_we, .pe_in_addr, .pe_in_wdata, .pe_start, .pe_pool_first, .pe_done, .pe_out
  );

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    logic sel;
    assign sel = (prog_pe == ($clog2(N_PE))'(p));
    pe u_pe (
      .clk, .rst_n,
      .prog_we(prog_we && sel), .prog_cu, .prog_row, .prog_data,
      .idx_we(idx_we && sel), .idx_addr, .idx_wdata,
      .map_we(map_we && sel), .map_cu, .map_row, .map_wdata,
      .in_we(pe_in_we[p]), .in_addr(pe_in_addr), .in_wdata(pe_in_wdata),
      .start(pe_start[p]), .pool_first(pe_pool_first), .cfg(pe_cfg[p]),
      .busy(pe_busy_unused[p]), .done(pe_done[p]),
      .out_data(pe_out[p]), .acc(pe_acc[p]), .stats(pe_stats[p])
    );
  end

endmodule
