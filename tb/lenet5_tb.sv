// lenet5_tb -- LeNet-5 inference on the accelerator at its default size.
//
// LeNet-5 layer shapes (32x32 input; conv 5x5x6; 2x2 max pool; conv 5x5x16;
// 2x2 max pool; fully connected 400-120-84-10) with random signed 8-bit
// weights pruned to a given sparsity (10 %, 50 % and 90 %) and a random
// non-negative 8-bit image. All nine weight slices stay resident at once:
//   PE 0      conv1  25 x 6
//   PE 1..2   conv2 150 x 16  (rows split 126 + 24)
//   PE 3..6   fc1   400 x 120 (rows split 126 + 126 + 126 + 22)
//   PE 7      fc2   120 x 84
//   PE 8      fc3    84 x 10
// The testbench plays the host: it lays out convolution windows (im2col) in
// the global buffer, runs jobs, and for layers split over several PEs adds
// the PE accumulators and requantises them itself. conv1 uses the hardware
// pooling (four windows per job); conv2 is pooled by the host. Every PE
// accumulator is compared with the exact dot product, every hardware output
// with the reference requantisation, and the ten logits with a layer-by-layer
// reference computed from the unsplit weight matrices. The number of OUs the
// compressed mappings use is printed next to the number a dense bit-split
// mapping of the same slices would need.
module lenet5_tb;
  import rram_pkg::*;
  import tb_map_pkg::*;

  localparam int unsigned N_PE = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                          gb_we = 0;
  logic [15:0]                   gb_addr = 0;
  logic [7:0]                    gb_wdata = 0, gb_rdata;
  logic [3:0]                    prog_pe = 0;
  logic                          prog_we = 0, idx_we = 0, map_we = 0, start = 0;
  logic [2:0]                    prog_cu = 0, map_cu = 0;
  logic [6:0]                    prog_row = 0, map_row = 0;
  logic [XBAR_COLS-1:0]          prog_data = 0;
  logic [OU_AW-1:0]              idx_addr = 0;
  idx_entry_t [N_CU-1:0]         idx_wdata = '0;
  row_map_t                      map_wdata = '0;
  pe_cfg_t                       pe_cfg [N_PE];
  logic [N_PE-1:0]               active = '0;
  logic [15:0]                   in_base [N_PE], out_base [N_PE];
  logic [7:0]                    pool_len = 1;
  logic                          busy, done;
  logic signed [ACC_W-1:0]       pe_acc [N_PE][N_OUT];
  pe_stats_t                     pe_stats [N_PE];

  rram_accelerator dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #2_000_000_000;
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

  // ---------------------------------------------------------------- network
  int img [32][32];
  int w1 [25][6], w2 [150][16], w3 [400][120], w4 [120][84], w5 [84][10];
  int sc [5], sh [5];                   // requantisation per layer
  pe_map maps [9];
  int first_row [9], n_rows_sl [9], layer_of [9];

  function automatic int rw(int sp);
    int v;
    if (($urandom % 100) < sp) return 0;
    do v = int'($signed(8'($urandom))); while (v == 0);
    return v;
  endfunction

  function automatic int rq(longint acc, int l, bit relu);
    return ref_post(acc, sc[l], sh[l], relu);
  endfunction

  // pick scale/shift so that the largest |acc| maps to about 100
  function automatic void pick(int l, longint maxabs);
    sc[l] = 100;
    sh[l] = 0;
    while ((maxabs * 100) >>> sh[l] > 100) sh[l]++;
  endfunction

  // reference activations
  int a1 [14][14][6], a2 [5][5][16], a3 [120], a4 [84], a5 [10];

  function automatic void reference();
    int c1 [28][28][6], c2 [10][10][16];
    longint mx;
    mx = 1;
    for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) for (int o = 0; o < 6; o++) begin
      longint s; s = 0;
      for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++) s += img[y+ky][x+kx] * w1[ky*5+kx][o];
      c1[y][x][o] = int'(s);
      if (s > mx) mx = s; if (-s > mx) mx = -s;
    end
    pick(0, mx);
    for (int y = 0; y < 14; y++) for (int x = 0; x < 14; x++) for (int o = 0; o < 6; o++) begin
      int m; m = -1000;
      for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++) begin
        int v; v = rq(c1[2*y+dy][2*x+dx][o], 0, 1);
        if (v > m) m = v;
      end
      a1[y][x][o] = m;
    end
    mx = 1;
    for (int y = 0; y < 10; y++) for (int x = 0; x < 10; x++) for (int o = 0; o < 16; o++) begin
      longint s; s = 0;
      for (int c = 0; c < 6; c++) for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++)
        s += a1[y+ky][x+kx][c] * w2[c*25+ky*5+kx][o];
      c2[y][x][o] = int'(s);
      if (s > mx) mx = s; if (-s > mx) mx = -s;
    end
    pick(1, mx);
    for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++) for (int o = 0; o < 16; o++) begin
      int m; m = -1000;
      for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++) begin
        int v; v = rq(c2[2*y+dy][2*x+dx][o], 1, 1);
        if (v > m) m = v;
      end
      a2[y][x][o] = m;
    end
    begin
      longint s3 [120], s4 [84], s5 [10];
      mx = 1;
      for (int o = 0; o < 120; o++) begin
        s3[o] = 0;
        for (int i = 0; i < 400; i++) s3[o] += a2[(i/16)/5][(i/16)%5][i%16] * w3[i][o];
        if (s3[o] > mx) mx = s3[o]; if (-s3[o] > mx) mx = -s3[o];
      end
      pick(2, mx);
      foreach (a3[o]) a3[o] = rq(s3[o], 2, 1);
      mx = 1;
      for (int o = 0; o < 84; o++) begin
        s4[o] = 0;
        for (int i = 0; i < 120; i++) s4[o] += a3[i] * w4[i][o];
        if (s4[o] > mx) mx = s4[o]; if (-s4[o] > mx) mx = -s4[o];
      end
      pick(3, mx);
      foreach (a4[o]) a4[o] = rq(s4[o], 3, 1);
      mx = 1;
      for (int o = 0; o < 10; o++) begin
        s5[o] = 0;
        for (int i = 0; i < 84; i++) s5[o] += a4[i] * w5[i][o];
        if (s5[o] > mx) mx = s5[o]; if (-s5[o] > mx) mx = -s5[o];
      end
      pick(4, mx);
      foreach (a5[o]) a5[o] = rq(s5[o], 4, 0);
    end
  endfunction

  // ---------------------------------------------------------------- host
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

  task automatic gb_write(int a, int d);
    @(negedge clk); gb_we = 1; gb_addr = 16'(a); gb_wdata = 8'(d);
    @(negedge clk); gb_we = 0;
  endtask

  task automatic gb_read(int a, output int d);
    @(negedge clk); gb_addr = 16'(a);
    @(negedge clk); d = int'($signed(gb_rdata));
  endtask

  task automatic run_job(logic [N_PE-1:0] act, int npool);
    active = act; pool_len = 8'(npool);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  // exact dot product of slice s with the input window written for it
  function automatic longint slice_dot(int s, int x [128], int j);
    longint r; r = 0;
    for (int i = 0; i < 128; i++) r += longint'(x[i]) * longint'(maps[s].w[i][j]);
    return r;
  endfunction

  task automatic run_network(int sp);
    int h1 [14][14][6], h2 [5][5][16], h3 [120], h4 [84], h5 [10];
    int win [128];
    int ous, dense;
    // weights
    foreach (w1[i, o]) w1[i][o] = rw(sp);
    foreach (w2[i, o]) w2[i][o] = rw(sp);
    foreach (w3[i, o]) w3[i][o] = rw(sp);
    foreach (w4[i, o]) w4[i][o] = rw(sp);
    foreach (w5[i, o]) w5[i][o] = rw(sp);
    foreach (img[y, x]) img[y][x] = $urandom % 128;
    reference();
    // slices
    layer_of  = '{0, 1, 1, 2, 2, 2, 2, 3, 4};
    first_row = '{0, 0, 126, 0, 126, 252, 378, 0, 0};
    n_rows_sl = '{25, 126, 24, 126, 126, 126, 22, 120, 84};
    ous = 0; dense = 0;
    for (int s = 0; s < 9; s++) begin
      maps[s] = new();
      foreach (maps[s].w[i, j]) begin
        int r, v;
        r = first_row[s] + i;
        v = 0;
        if (i < n_rows_sl[s])
          case (layer_of[s])
            0: if (j < 6)   v = w1[r][j];
            1: if (j < 16)  v = w2[r][j];
            2: if (j < 120) v = w3[r][j];
            3: if (j < 84)  v = w4[r][j];
            default: if (j < 10) v = w5[r][j];
          endcase
        maps[s].w[i][j] = 8'(v);
      end
      maps[s].build();
      check(maps[s].max_bands <= OU_ROWS, "slice fits the crossbar");
      ous   += N_CU * maps[s].n_rows * maps[s].n_cols;
      dense += N_CU * ((n_rows_sl[s] + OU_H - 1) / OU_H) *
               ((layer_of[s] == 0 ? 6 : layer_of[s] == 1 ? 16 : layer_of[s] == 2 ? 120 :
                 layer_of[s] == 3 ? 84 : 10) + OU_W - 1) / OU_W;
      pe_cfg[s].direction = direction_e'(s % 2);
      pe_cfg[s].n_rows = 5'(maps[s].n_rows);
      pe_cfg[s].n_cols = 5'(maps[s].n_cols);
      pe_cfg[s].scale  = 8'(sc[layer_of[s]]);
      pe_cfg[s].shift  = 5'(sh[layer_of[s]]);
      pe_cfg[s].relu_en = (layer_of[s] != 4);
      program_pe(s, maps[s]);
      in_base[s]  = 16'(s * 1024);
      out_base[s] = 16'(32768 + s * 256);
    end
    for (int p = 9; p < N_PE; p++) begin
      pe_cfg[p] = '0; pe_cfg[p].n_rows = 1; pe_cfg[p].n_cols = 1; in_base[p] = 0; out_base[p] = 16'(60000);
    end
    $display("sparsity %0d%%: OUs visited per operation, all slices: %0d compressed vs %0d dense bit-split",
             sp, ous, dense);
    check(ous <= dense || sp < 20, "compression does not grow the OU count");

    // conv1 + ReLU + hardware 2x2 max pooling
    for (int y = 0; y < 14; y++) for (int x = 0; x < 14; x++) begin
      for (int t = 0; t < 4; t++)
        for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++)
          gb_write(t * 128 + ky * 5 + kx, img[2*y + t/2 + ky][2*x + t%2 + kx]);
      run_job(16'h0001, 4);
      for (int o = 0; o < 6; o++) begin
        gb_read(32768 + o, h1[y][x][o]);
        check(h1[y][x][o] == a1[y][x][o], $sformatf("conv1 (%0d,%0d,%0d)", y, x, o));
      end
    end
    // conv2 over PE 1 and 2, host combines, requantises and pools
    begin
      int c2 [10][10][16];
      for (int y = 0; y < 10; y++) for (int x = 0; x < 10; x++) begin
        int xin [150];
        for (int c = 0; c < 6; c++) for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++)
          xin[c*25 + ky*5 + kx] = h1[y+ky][x+kx][c];
        for (int s = 1; s <= 2; s++) begin
          foreach (win[i]) win[i] = (i < n_rows_sl[s]) ? xin[first_row[s] + i] : 0;
          for (int i = 0; i < n_rows_sl[s]; i++) gb_write(s * 1024 + i, win[i]);
        end
        run_job(16'h0006, 1);
        for (int o = 0; o < 16; o++) begin
          longint tot;
          tot = 0;
          for (int s = 1; s <= 2; s++) begin
            foreach (win[i]) win[i] = (i < n_rows_sl[s]) ? xin[first_row[s] + i] : 0;
            check(longint'(pe_acc[s][o]) == slice_dot(s, win, o), "conv2 slice accumulator");
            tot += longint'(pe_acc[s][o]);
          end
          c2[y][x][o] = rq(tot, 1, 1);
        end
      end
      for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++) for (int o = 0; o < 16; o++) begin
        int m; m = -1000;
        for (int d = 0; d < 4; d++) if (c2[2*y + d/2][2*x + d%2][o] > m) m = c2[2*y + d/2][2*x + d%2][o];
        h2[y][x][o] = m;
        check(m == a2[y][x][o], "conv2 pooled");
      end
    end
    // fc1 over PE 3..6
    begin
      int xin [400];
      for (int i = 0; i < 400; i++) xin[i] = h2[(i/16)/5][(i/16)%5][i%16];
      for (int s = 3; s <= 6; s++)
        for (int i = 0; i < n_rows_sl[s]; i++) gb_write(s * 1024 + i, xin[first_row[s] + i]);
      run_job(16'h0078, 1);
      for (int o = 0; o < 120; o++) begin
        longint tot; tot = 0;
        for (int s = 3; s <= 6; s++) tot += longint'(pe_acc[s][o]);
        h3[o] = rq(tot, 2, 1);
        check(h3[o] == a3[o], $sformatf("fc1 %0d", o));
      end
    end
    // fc2 (PE 7) and fc3 (PE 8) with the PE's own requantisation
    for (int i = 0; i < 120; i++) gb_write(7 * 1024 + i, h3[i]);
    run_job(16'h0080, 1);
    for (int o = 0; o < 84; o++) begin
      gb_read(32768 + 7 * 256 + o, h4[o]);
      check(h4[o] == a4[o], $sformatf("fc2 %0d", o));
    end
    for (int i = 0; i < 84; i++) gb_write(8 * 1024 + i, h4[i]);
    run_job(16'h0100, 1);
    for (int o = 0; o < 10; o++) begin
      gb_read(32768 + 8 * 256 + o, h5[o]);
      check(h5[o] == a5[o], $sformatf("logit %0d: %0d exp %0d", o, h5[o], a5[o]));
    end
    begin
      string txt; txt = "";
      foreach (h5[o]) txt = {txt, $sformatf(" %0d", h5[o])};
      $display("sparsity %0d%%: logits%s", sp, txt);
    end
  endtask

  int sps [3] = '{10, 50, 90};
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (sps[i]) run_network(sps[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
