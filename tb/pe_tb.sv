// pe_tb -- self-checking test of one processing element.
//
// Random signed 8-bit weight slices (126 x 128) at several sparsity ratios
// are mapped with the reference mapper, programmed into the PE, and random
// input vectors are run in both OU orders. Checked against values computed
// directly from W and x: every accumulator (exact dot product), every
// requantised/ReLU output, max pooling across two operations, the event
// counters (OUs issued, wordline reuses, repetitive columns, subtractions)
// and the operation latency.
module pe_tb;
  import rram_pkg::*;
  import tb_map_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                          prog_we = 0, idx_we = 0, map_we = 0, in_we = 0, start = 0, pool_first = 1;
  logic [$clog2(N_CU)-1:0]       prog_cu = 0, map_cu = 0;
  logic [$clog2(XBAR_ROWS)-1:0]  prog_row = 0, map_row = 0;
  logic [XBAR_COLS-1:0]          prog_data = 0;
  logic [OU_AW-1:0]              idx_addr = 0;
  idx_entry_t [N_CU-1:0]         idx_wdata = '0;
  row_map_t                      map_wdata = '0;
  logic [IN_AW-1:0]              in_addr = 0;
  logic [A_BITS-1:0]             in_wdata = 0;
  pe_cfg_t                       cfg = '0;
  logic                          busy, done;
  logic signed [A_BITS-1:0]      out_data [N_OUT];
  logic signed [ACC_W-1:0]       acc [N_OUT];
  pe_stats_t                     stats;

  pe dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic program_pe(pe_map m);
    for (int k = 0; k < N_CU; k++)
      for (int r = 0; r < XBAR_ROWS; r++) begin
        @(negedge clk);
        prog_we = 1; prog_cu = 3'(k); prog_row = 7'(r); prog_data = m.xbar[k][r];
        map_we  = 1; map_cu  = 3'(k); map_row  = 7'(r); map_wdata = m.rmap[k][r];
      end
    @(negedge clk); prog_we = 0; map_we = 0;
    for (int o = 0; o < N_OU; o++) begin
      @(negedge clk);
      idx_we = 1; idx_addr = OU_AW'(o);
      for (int k = 0; k < N_CU; k++) idx_wdata[k] = m.idx[o][k];
    end
    @(negedge clk); idx_we = 0;
  endtask

  task automatic load_input(logic signed [7:0] x [N_IN]);
    for (int i = 0; i < N_IN; i++) begin
      @(negedge clk); in_we = 1; in_addr = IN_AW'(i); in_wdata = x[i];
    end
    @(negedge clk); in_we = 0;
  endtask

  task automatic run(bit first, output int lat);
    int t0;
    @(negedge clk); start = 1; pool_first = first; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
  endtask

  pe_map m;
  logic signed [7:0] x [N_IN];
  int ref_out [N_OUT];
  int sp [3] = '{0, 50, 85};

  initial begin
    m = new();
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (sp[s]) begin
      m.random_weights(sp[s], 126, N_OUT);
      m.build();
      check(m.max_bands <= OU_ROWS, "mapping fits 18 OU rows");
      $display("sparsity %0d%%: %0d x %0d OUs, %0d pairs, %0d zero rows, %0d pads",
               sp[s], m.n_rows, m.n_cols, m.pairs, m.zero_rows, m.pads);
      program_pe(m);
      for (int d = 0; d < 2; d++) begin
        int lat, nou;
        cfg.direction = direction_e'(d);
        cfg.n_rows = 5'(m.n_rows); cfg.n_cols = 5'(m.n_cols);
        cfg.scale = 8'(1 + $urandom % 200); cfg.shift = 5'(12 + $urandom % 6); cfg.relu_en = d[0];
        for (int rep = 0; rep < 2; rep++) begin
          foreach (x[i]) x[i] = (i < 126) ? 8'($urandom) : 8'h0;
          load_input(x);
          run(rep == 0, lat);
          nou = m.n_rows * m.n_cols;
          check(lat == XBAR_ROWS + 1 + A_BITS * nou + 3, $sformatf("latency %0d", lat));
          check(A_BITS * nou <= A_BITS * OU_ROWS * OU_COLS, "cycle bound");
          check(int'(stats.ou_cycles) == A_BITS * nou, "ou_cycles");
          check(int'(stats.wl_reuse) == (d == 0 ? A_BITS * m.n_rows * (m.n_cols - 1) : 0), "wl_reuse");
          check(int'(stats.rep_cols) == A_BITS * m.pairs, $sformatf("rep_cols %0d vs %0d", stats.rep_cols, A_BITS * m.pairs));
          check(int'(stats.sub_cycles) == nou * (A_BITS - 1 + N_CU - 1), "sub_cycles");
          for (int j = 0; j < N_OUT; j++) begin
            longint e;
            int r;
            e = m.dot(x, j);
            check(longint'(acc[j]) == e, $sformatf("acc[%0d] %0d exp %0d", j, acc[j], e));
            r = ref_post(e, cfg.scale, cfg.shift, cfg.relu_en);
            if (rep == 0) ref_out[j] = r;
            else if (r > ref_out[j]) ref_out[j] = r;
            check(int'(out_data[j]) == ref_out[j], $sformatf("out[%0d] %0d exp %0d", j, out_data[j], ref_out[j]));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
