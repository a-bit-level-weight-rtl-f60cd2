// pe -- processing element of the accelerator.
//
// A PE computes y = W^T x for one slice of a layer: up to N_IN = 128 signed
// 8-bit inputs against up to N_OUT = 128 output columns of signed 8-bit
// weights. The weights are split by bit position over eight computation
// units: CU k holds bit k of every weight (CU 7 the two's-complement sign
// bit), reordered and compressed offline so that all-zero columns and rows
// disappear and pairs of columns that are identical within an OU share one
// physical column. The indexing crossbar tells, per OU, which logical output
// columns the physical columns stand for; the row-index tables of the input
// decoder tell which input feeds each physical row of each CU.
//
// Data path of one operation: input register -> input decoder -> eight
// IR-CUs -> crossbars + ADCs (one OU per cycle, input bits LSB first) ->
// eight output decoders -> shift-and-add (weight 2^(k+b), subtraction for the
// sign terms) -> output register (signed accumulators) -> scaling unit
// (requantise to int8) -> non-linear unit (ReLU) -> pooling unit (max over
// successive operations) -> `out_data`. The raw accumulators are visible on
// `acc`.
//
// Interface: programming ports for the crossbars (`prog_*`, one 128-bit row
// of one CU per cycle), the indexing crossbar (`idx_*`) and the row-index
// tables (`map_*`); a byte write port into the input register (`in_*`);
// `start` with `cfg` and `pool_first` begins an operation, `done` pulses at
// its end (see pe_controller for the cycle count).
module pe
  import rram_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  // crossbar programming
  input  logic                          prog_we,
  input  logic [$clog2(N_CU)-1:0]       prog_cu,
  input  logic [$clog2(XBAR_ROWS)-1:0]  prog_row,
  input  logic [XBAR_COLS-1:0]          prog_data,
  // indexing crossbar programming
  input  logic                          idx_we,
  input  logic [OU_AW-1:0]              idx_addr,
  input  idx_entry_t [N_CU-1:0]         idx_wdata,
  // row-index tables
  input  logic                          map_we,
  input  logic [$clog2(N_CU)-1:0]       map_cu,
  input  logic [$clog2(XBAR_ROWS)-1:0]  map_row,
  input  row_map_t                      map_wdata,
  // input vector
  input  logic                          in_we,
  input  logic [IN_AW-1:0]              in_addr,
  input  logic [A_BITS-1:0]             in_wdata,
  // operation
  input  logic                          start,
  input  logic                          pool_first,
  input  pe_cfg_t                       cfg,
  output logic                          busy,
  output logic                          done,
  output logic signed [A_BITS-1:0]      out_data [N_OUT],
  output logic signed [ACC_W-1:0]       acc      [N_OUT],
  output pe_stats_t                     stats
);

  logic [A_BITS-1:0]            in_vec [N_IN];
  logic [N_CU-1:0]              ir_we;
  logic [$clog2(XBAR_ROWS)-1:0] ir_row;
  logic [A_BITS-1:0]            ir_wdata [N_CU];
  logic                         ou_valid;
  ou_row_t                      ou_row;
  ou_col_t                      ou_col;
  in_bit_t                      in_bit;
  adc_code_t                    adc_code [N_CU][OU_W];
  logic                         code_valid_unused [N_CU];
  logic                         idx_rd_en;
  logic [OU_AW-1:0]             idx_rd_addr;
  idx_entry_t [N_CU-1:0]        idx_rd_data;
  logic [N_CU-1:0]              ps_valid;
  in_bit_t                      ps_bit;
  adc_code_t                    ps [N_CU][N_OUT];
  logic                         acc_clear, acc_en, pool_valid;
  logic signed [ACC_W-1:0]      contrib [N_OUT];
  logic                         pool_first_q;

  input_register u_in_reg (
    .clk, .we(in_we), .waddr(in_addr), .wdata(in_wdata), .data(in_vec)
  );

  pe_controller u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .map_we, .map_cu, .map_row, .map_wdata,
    .in_data(in_vec),
    .ir_we, .ir_row, .ir_wdata,
    .ou_valid, .ou_row, .ou_col, .in_bit, .adc_code,
    .idx_rd_en, .idx_rd_addr, .idx_rd_data,
    .ps_valid, .ps_bit, .ps, .acc_clear, .acc_en, .pool_valid, .stats
  );

  for (genvar k = 0; k < N_CU; k++) begin : g_cu
    computation_unit u_cu (
      .clk, .rst_n,
      .ir_we(ir_we[k]), .ir_row, .ir_wdata(ir_wdata[k]),
      .prog_we(prog_we && prog_cu == ($clog2(N_CU))'(k)), .prog_row, .prog_data,
      .ou_valid, .ou_row, .ou_col, .in_bit,
      .adc_code(adc_code[k]), .code_valid(code_valid_unused[k])
    );
  end

  indexing_crossbar u_idx (
    .clk, .wr_en(idx_we), .wr_addr(idx_addr), .wr_data(idx_wdata),
    .rd_en(idx_rd_en), .rd_addr(idx_rd_addr), .rd_data(idx_rd_data)
  );

  shift_add u_sa (.cu_valid(ps_valid), .in_bit(ps_bit), .ps, .contrib);

  output_register u_out_reg (
    .clk, .rst_n, .clear(acc_clear), .acc_en, .contrib, .acc
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     pool_first_q <= 1'b1;
    else if (start && !busy) pool_first_q <= pool_first;
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_post
    logic signed [A_BITS-1:0] scaled, activated;
    scaling_unit   u_scale (.acc(acc[j]), .scale(cfg.scale), .shift(cfg.shift), .y(scaled));
    nonlinear_unit u_nl    (.relu_en(cfg.relu_en), .x(scaled), .y(activated));
    pooling_unit   u_pool  (.clk, .rst_n, .in_valid(pool_valid), .first(pool_first_q),
                            .x(activated), .y(out_data[j]));
  end

endmodule
