// pe_controller -- control of one processing element, with the input decoder
// and the eight output decoders of its CUs.
//
// One operation (one input vector through the PE's weight slice) runs as
//   LOAD    the input decoder copies the input register into the eight IR-CUs
//           in each CU's own row order (XBAR_ROWS + 1 cycles); the output
//           register is cleared;
//   COMPUTE the OU sequencer issues one OU per cycle to all eight CUs at once
//           (A_BITS * n_rows * n_cols cycles, horizontal or vertical order);
//           in the same cycle the OU's row of the indexing crossbar is read;
//   one cycle later the ADC codes and the index entries are there: each CU's
//           output decoder routes its 8 codes to logical output columns, and
//           the routed partial sums go to the shift-and-add unit with the
//           input bit they belong to; the output register accumulates them;
//   POST    the scaled, activated outputs enter the pooling unit (`pool_valid`)
//           and `done` pulses.
// An operation therefore takes XBAR_ROWS + 1 + A_BITS*n_rows*n_cols + 3
// cycles from `start` to `done`.
//
// Besides the published structure (input decoder and output decoder in the
// PE controller, a `direction` signal choosing the data flow), the phase
// order, the lock-step of the eight CUs and the event counters in `stats` are
// this design's choices.
module pe_controller
  import rram_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  pe_cfg_t                       cfg,
  output logic                          busy,
  output logic                          done,
  // row-index tables of the input decoder
  input  logic                          map_we,
  input  logic [$clog2(N_CU)-1:0]       map_cu,
  input  logic [$clog2(XBAR_ROWS)-1:0]  map_row,
  input  row_map_t                      map_wdata,
  // input register (PE buffer)
  input  logic [A_BITS-1:0]             in_data [N_IN],
  // to the CUs
  output logic [N_CU-1:0]               ir_we,
  output logic [$clog2(XBAR_ROWS)-1:0]  ir_row,
  output logic [A_BITS-1:0]             ir_wdata [N_CU],
  output logic                          ou_valid,
  output ou_row_t                       ou_row,
  output ou_col_t                       ou_col,
  output in_bit_t                       in_bit,
  input  adc_code_t                     adc_code [N_CU][OU_W],
  // indexing crossbar
  output logic                          idx_rd_en,
  output logic [OU_AW-1:0]              idx_rd_addr,
  input  idx_entry_t [N_CU-1:0]         idx_rd_data,
  // to shift-and-add / output register / post-processing
  output logic [N_CU-1:0]               ps_valid,
  output in_bit_t                       ps_bit,
  output adc_code_t                     ps [N_CU][N_OUT],
  output logic                          acc_clear,
  output logic                          acc_en,
  output logic                          pool_valid,
  output pe_stats_t                     stats
);

  typedef enum logic [2:0] { S_IDLE, S_LOAD, S_COMPUTE, S_DRAIN, S_POST } state_e;
  state_e state;

  logic dec_start, dec_busy, dec_done;
  logic seq_start, seq_busy, seq_valid, seq_last, seq_wl_reuse;
  logic valid_q;
  in_bit_t bit_q;
  logic [$clog2(OU_W+1)-1:0] n_rep [N_CU];
  logic hit_unused [N_CU][N_OUT];

  input_decoder u_in_dec (
    .clk, .rst_n, .map_we, .map_cu, .map_row, .map_wdata,
    .start(dec_start), .in_data, .busy(dec_busy), .done(dec_done),
    .ir_we, .ir_row, .ir_wdata
  );

  ou_sequencer u_seq (
    .clk, .rst_n, .start(seq_start), .direction(cfg.direction),
    .n_rows(cfg.n_rows), .n_cols(cfg.n_cols),
    .busy(seq_busy), .valid(seq_valid), .in_bit, .ou_row, .ou_col,
    .wl_reuse(seq_wl_reuse), .last(seq_last)
  );

  assign ou_valid    = seq_valid;
  assign idx_rd_en   = seq_valid;
  assign idx_rd_addr = OU_AW'(int'(ou_row) * OU_COLS + int'(ou_col));

  for (genvar k = 0; k < N_CU; k++) begin : g_out_dec
    output_decoder u_out_dec (
      .valid(valid_q), .code(adc_code[k]), .entry(idx_rd_data[k]),
      .ps(ps[k]), .hit(hit_unused[k]), .n_rep(n_rep[k])
    );
  end

  assign ps_valid  = {N_CU{valid_q}};
  assign ps_bit    = bit_q;
  assign acc_en    = valid_q;
  assign dec_start = (state == S_IDLE) && start;
  assign acc_clear = dec_start;
  assign seq_start = (state == S_LOAD) && dec_done;
  assign busy      = (state != S_IDLE);
  assign pool_valid = (state == S_POST);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      valid_q <= 1'b0;
      bit_q   <= '0;
      stats   <= '0;
    end else begin
      done    <= 1'b0;
      valid_q <= seq_valid;
      bit_q   <= in_bit;
      unique case (state)
        S_IDLE:    if (start) begin
                     state <= S_LOAD;
                     stats <= '0;
                   end
        S_LOAD:    if (dec_done) state <= S_COMPUTE;
        S_COMPUTE: if (seq_last) state <= S_DRAIN;
        S_DRAIN:   state <= S_POST;           // last accumulation happens here
        S_POST:    begin
                     state <= S_IDLE;
                     done  <= 1'b1;
                   end
        default:   state <= S_IDLE;
      endcase
      if (seq_valid) begin
        stats.ou_cycles <= stats.ou_cycles + 1'b1;
        if (seq_wl_reuse) stats.wl_reuse <= stats.wl_reuse + 1'b1;
        // CU 7 is subtracted for input bits 0..6, CUs 0..6 for input bit 7
        stats.sub_cycles <= stats.sub_cycles + ((32'(in_bit) == A_BITS - 1) ? 32'(N_CU - 1) : 32'd1);
      end
      if (valid_q) begin
        logic [31:0] sum;
        sum = '0;
        for (int k = 0; k < N_CU; k++) sum = sum + 32'(n_rep[k]);
        stats.rep_cols <= stats.rep_cols + sum;
      end
    end
  end

  // The decoder and the sequencer are never active together.
  assert property (@(posedge clk) disable iff (!rst_n) !(dec_busy && seq_busy));

endmodule
