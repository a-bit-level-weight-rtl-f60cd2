// rram_accelerator_tb -- end-to-end test of the accelerator at its default
// size (16 PEs, 64 KiB global buffer, 128x128 crossbars, 7x8 OUs).
//
// Every PE gets its own random weight slice (sparsity 0..95 %), mapped with
// the reference mapper and programmed through the host ports. Input
// activations are written into the global buffer, and two jobs are run:
//   job 1: all PEs, two windows with max pooling (pool_len = 2);
//   job 2: every other PE only, no pooling, different input vectors.
// The results read back from the global buffer are compared with
// sat8(round(W^T x * scale / 2^shift)) (+ ReLU, + max over windows) computed
// from W and x directly; PE accumulators of the last window are compared
// with the exact dot products. The test also counts how often each mechanism
// of the design occurred (both OU orders, wordline reuse, repetitive columns,
// padded OUs, dropped all-zero rows and columns, sign subtraction, pooling,
// ReLU clipping, inactive PEs) and fails if one never did.
module rram_accelerator_tb;
  import rram_pkg::*;
  import tb_map_pkg::*;

  localparam int unsigned N_PE     = 16;
  localparam int unsigned GB_DEPTH = 65536;
  localparam int unsigned N_USED   = 126;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                          gb_we = 0;
  logic [$clog2(GB_DEPTH)-1:0]   gb_addr = 0;
  logic [7:0]                    gb_wdata = 0, gb_rdata;
  logic [$clog2(N_PE)-1:0]       prog_pe = 0;
  logic                          prog_we = 0, idx_we = 0, map_we = 0, start = 0;
  logic [$clog2(N_CU)-1:0]       prog_cu = 0, map_cu = 0;
  logic [$clog2(XBAR_ROWS)-1:0]  prog_row = 0, map_row = 0;
  logic [XBAR_COLS-1:0]          prog_data = 0;
  logic [OU_AW-1:0]              idx_addr = 0;
  idx_entry_t [N_CU-1:0]         idx_wdata = '0;
  row_map_t                      map_wdata = '0;
  pe_cfg_t                       pe_cfg [N_PE];
  logic [N_PE-1:0]               active = '0;
  logic [$clog2(GB_DEPTH)-1:0]   in_base [N_PE], out_base [N_PE];
  logic [7:0]                    pool_len = 1;
  logic                          busy, done;
  logic signed [ACC_W-1:0]       pe_acc [N_PE][N_OUT];
  pe_stats_t                     pe_stats [N_PE];

  rram_accelerator dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #200_000_000;
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

  pe_map maps [N_PE];
  // mechanism counters
  int n_horiz, n_vert, n_wl_reuse, n_rep, n_pad, n_zero_row, n_zero_col, n_sub, n_pool, n_relu_clip, n_skip_pe;

  task automatic program_pe(int p, pe_map m);
    prog_pe = 4'(p);
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

  task automatic gb_write(int a, logic [7:0] d);
    @(negedge clk); gb_we = 1; gb_addr = 16'(a); gb_wdata = d;
    @(negedge clk); gb_we = 0;
  endtask

  task automatic gb_read(int a, output logic [7:0] d);
    @(negedge clk); gb_addr = 16'(a);
    @(negedge clk); d = gb_rdata;
  endtask

  logic signed [7:0] xs [2][N_PE][N_IN];     // inputs per window and PE

  task automatic run_job(int npool, logic [N_PE-1:0] act, int seed_off);
    int expv [N_PE][N_OUT];
    for (int p = 0; p < N_PE; p++) begin
      in_base[p]  = 16'(p * 1024 + seed_off);
      out_base[p] = 16'(32768 + p * 256 + seed_off);
      for (int t = 0; t < npool; t++)
        for (int i = 0; i < N_IN; i++) begin
          xs[t][p][i] = (i < N_USED) ? 8'($urandom) : 8'h0;
          gb_write(p * 1024 + seed_off + t * N_IN + i, xs[t][p][i]);
        end
    end
    active = act; pool_len = 8'(npool);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int p = 0; p < N_PE; p++) begin
      if (!act[p]) begin n_skip_pe++; continue; end
      if (pe_cfg[p].direction == DIR_HORIZONTAL) n_horiz++; else n_vert++;
      n_wl_reuse += int'(pe_stats[p].wl_reuse);
      n_rep      += int'(pe_stats[p].rep_cols);
      n_sub      += int'(pe_stats[p].sub_cycles);
      for (int j = 0; j < N_OUT; j++) begin
        for (int t = 0; t < npool; t++) begin
          longint e;
          int r;
          e = maps[p].dot(xs[t][p], j);
          if (t == npool - 1) check(longint'(pe_acc[p][j]) == e, $sformatf("pe%0d acc[%0d]", p, j));
          r = ref_post(e, pe_cfg[p].scale, pe_cfg[p].shift, pe_cfg[p].relu_en);
          if (pe_cfg[p].relu_en && ref_post(e, pe_cfg[p].scale, pe_cfg[p].shift, 0) < 0) n_relu_clip++;
          if (t == 0) expv[p][j] = r;
          else begin
            if (r != expv[p][j]) n_pool++;
            if (r > expv[p][j]) expv[p][j] = r;
          end
        end
      end
    end
    for (int p = 0; p < N_PE; p++) begin
      if (!act[p]) continue;
      for (int j = 0; j < N_OUT; j++) begin
        logic [7:0] d;
        gb_read(32768 + p * 256 + seed_off + j, d);
        check($signed(d) == 8'(expv[p][j]), $sformatf("pe%0d out[%0d] %0d exp %0d", p, j, $signed(d), expv[p][j]));
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < N_PE; p++) begin
      int sp;
      sp = (p * 95) / (N_PE - 1);             // 0 % .. 95 %
      maps[p] = new();
      maps[p].random_weights(sp, N_USED, N_OUT);
      maps[p].build();
      check(maps[p].max_bands <= OU_ROWS, "mapping fits");
      n_pad      += maps[p].pads;
      n_zero_row += maps[p].zero_rows - N_CU * (N_IN - N_USED);
      n_zero_col += maps[p].zero_cols;
      pe_cfg[p].direction = direction_e'(p % 2);
      pe_cfg[p].n_rows    = 5'(maps[p].n_rows);
      pe_cfg[p].n_cols    = 5'(maps[p].n_cols);
      pe_cfg[p].scale     = 8'(1 + $urandom % 255);
      pe_cfg[p].shift     = 5'(13 + $urandom % 4);
      pe_cfg[p].relu_en   = ((p / 2) % 2) == 0;
      $display("PE %0d: sparsity %0d%%, %0d x %0d OUs of %0d x %0d", p, sp,
               maps[p].n_rows, maps[p].n_cols, OU_ROWS, OU_COLS);
      program_pe(p, maps[p]);
    end
    run_job(2, '1, 0);
    run_job(1, 16'h5555, 300);
    $display("mechanisms: horiz=%0d vert=%0d wl_reuse=%0d rep_cols=%0d pads=%0d zero_rows=%0d zero_cols=%0d sub=%0d pool=%0d relu_clip=%0d skipped_pe=%0d",
             n_horiz, n_vert, n_wl_reuse, n_rep, n_pad, n_zero_row, n_zero_col, n_sub, n_pool, n_relu_clip, n_skip_pe);
    check(n_horiz > 0, "horizontal order used");
    check(n_vert > 0, "vertical order used");
    check(n_wl_reuse > 0, "wordline reuse happened");
    check(n_rep > 0, "repetitive columns routed");
    check(n_pad > 0, "padded OU occurred");
    check(n_zero_row > 0, "all-zero rows dropped");
    check(n_zero_col > 0, "all-zero columns dropped");
    check(n_sub > 0, "shift-and-subtract used");
    check(n_pool > 0, "pooling changed a result");
    check(n_relu_clip > 0, "ReLU clipped a value");
    check(n_skip_pe > 0, "inactive PE skipped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
