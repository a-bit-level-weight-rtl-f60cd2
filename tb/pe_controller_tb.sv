// pe_controller_tb -- runs the PE controller against small models of its
// surroundings: an input register with random bytes, CUs whose ADC code is a
// known function of (CU, OU, input bit, column) one cycle after the OU is
// issued, and an indexing crossbar holding random column lists (with
// repetitive columns) with a one-cycle read. Checks the load phase (IR-CU
// writes in row order with the decoded inputs), that every routed partial
// sum reaches the logical column its list names with the right code and
// input bit, the number of compute cycles, the accumulate/clear/pool strobes,
// the latency start -> done, and the repetitive-column counter.
module pe_controller_tb;
  import rram_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  pe_cfg_t cfg = '0;
  logic busy, done;
  logic map_we = 0;
  logic [2:0] map_cu = 0;
  logic [6:0] map_row = 0;
  row_map_t map_wdata = '0;
  logic [7:0] in_data [N_IN];
  logic [N_CU-1:0] ir_we;
  logic [6:0] ir_row;
  logic [7:0] ir_wdata [N_CU];
  logic ou_valid;
  ou_row_t ou_row; ou_col_t ou_col; in_bit_t in_bit;
  adc_code_t adc_code [N_CU][OU_W];
  logic idx_rd_en;
  logic [OU_AW-1:0] idx_rd_addr;
  idx_entry_t [N_CU-1:0] idx_rd_data;
  logic [N_CU-1:0] ps_valid;
  in_bit_t ps_bit;
  adc_code_t ps [N_CU][N_OUT];
  logic acc_clear, acc_en, pool_valid;
  pe_stats_t stats;
  pe_controller dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  function automatic adc_code_t fcode(int k, int o, int b, int c);
    return adc_code_t'((k * 3 + o * 5 + b * 7 + c * 11) % 8);
  endfunction

  // environment models
  idx_entry_t [N_CU-1:0] idxmem [N_OU];
  int exp_col [N_OU][N_CU][N_OUT];   // physical column feeding logical column j, -1 if none
  int nrep_tot [N_OU];
  row_map_t rmap [N_CU][XBAR_ROWS];
  int o_q, b_q;
  always_ff @(posedge clk) begin
    if (idx_rd_en) idx_rd_data <= idxmem[idx_rd_addr];
    if (ou_valid) begin
      o_q <= int'(ou_row) * OU_COLS + int'(ou_col);
      b_q <= int'(in_bit);
      for (int k = 0; k < N_CU; k++)
        for (int c = 0; c < OU_W; c++)
          adc_code[k][c] <= fcode(k, int'(ou_row) * OU_COLS + int'(ou_col), int'(in_bit), c);
    end
  end

  int cyc = 0, n_ps = 0, n_clear = 0, n_pool = 0, exp_rep = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    foreach (in_data[i]) in_data[i] = 8'($urandom);
    for (int o = 0; o < N_OU; o++) begin
      nrep_tot[o] = 0;
      for (int k = 0; k < N_CU; k++) begin
        int r, ns, L, prev;
        bit taken [N_OUT];
        int lst [MAX_IDX];
        foreach (taken[j]) begin taken[j] = 0; exp_col[o][k][j] = -1; end
        r = $urandom % (OU_W + 1);
        ns = (r > 0) ? OU_W - r : $urandom % (OU_W + 1);
        L = 0;
        for (int c = 0; c < r + ns; c++)
          for (int q = 0; q < ((c < r) ? 2 : 1); q++) begin
            int j;
            do j = $urandom % N_OUT; while (taken[j]);
            taken[j] = 1; lst[L++] = j; exp_col[o][k][j] = c;
          end
        nrep_tot[o] += r;
        idxmem[o][k] = '0;
        idxmem[o][k].len = LEN_W'(L);
        prev = 0;
        for (int s = 0; s < L; s++) begin idxmem[o][k].delta[s] = DELTA_W'(lst[s] - prev); prev = lst[s]; end
      end
    end
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < N_CU; k++)
      for (int r = 0; r < XBAR_ROWS; r++) begin
        rmap[k][r].valid = ($urandom % 5) != 0;
        rmap[k][r].idx = IN_AW'($urandom);
        @(negedge clk); map_we = 1; map_cu = 3'(k); map_row = 7'(r); map_wdata = rmap[k][r];
      end
    @(negedge clk); map_we = 0;
    for (int t = 0; t < 3; t++) begin
      int t0, nr, nc;
      nr = (t == 0) ? OU_ROWS : 1 + $urandom % OU_ROWS;
      nc = (t == 0) ? OU_COLS : 1 + $urandom % OU_COLS;
      cfg.direction = direction_e'(t % 2); cfg.n_rows = 5'(nr); cfg.n_cols = 5'(nc);
      n_ps = 0; n_clear = 0; n_pool = 0; exp_rep = 0;
      start = 1; t0 = cyc;
      #1 if (acc_clear) n_clear++;
      @(negedge clk); start = 0;
      while (!done) begin
        if (|ir_we) begin
          for (int k = 0; k < N_CU; k++)
            chk(ir_we[k] && ir_wdata[k] == (rmap[k][ir_row].valid ? in_data[rmap[k][ir_row].idx] : 8'h0), "ir write");
        end
        if (acc_clear) n_clear++;
        if (pool_valid) n_pool++;
        if (acc_en) begin
          n_ps++;
          exp_rep += nrep_tot[o_q];
          chk(ps_valid == '1 && int'(ps_bit) == b_q, "ps_bit");
          for (int k = 0; k < N_CU; k++)
            for (int j = 0; j < N_OUT; j++) begin
              int c;
              c = exp_col[o_q][k][j];
              chk(ps[k][j] == ((c >= 0) ? fcode(k, o_q, b_q, c) : adc_code_t'(0)), $sformatf("ps o%0d k%0d j%0d", o_q, k, j));
            end
        end
        @(negedge clk);
      end
      chk(n_ps == A_BITS * nr * nc, $sformatf("compute cycles %0d", n_ps));
      chk(n_clear == 1 && n_pool == 1, "clear and pool strobes");
      chk(cyc - t0 == XBAR_ROWS + 1 + A_BITS * nr * nc + 3, $sformatf("latency %0d", cyc - t0));
      chk(int'(stats.rep_cols) == exp_rep && int'(stats.ou_cycles) == A_BITS * nr * nc, "stats");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
