// tb_map_pkg -- reference mapper and reference model used by the testbenches.
//
// The mapper turns a signed 8-bit weight matrix W[N_IN][N_OUT] into the
// contents a PE is programmed with. It is a simple greedy stand-in for the
// offline reordering (it does not search for the best pairs), but it produces
// every structure the hardware must handle:
//   * bit splitting: bit plane k of W goes to CU k;
//   * row compression: rows of a bit plane that are all zero are dropped;
//     the remaining rows are packed into bands of OU_H rows;
//   * per band, columns whose OU_H bits are all zero are dropped, and two
//     columns with identical bits share one physical column ("repetitive"
//     columns, at most two logical columns per physical column);
//   * per OU, repetitive columns first, then single ones; an OU that holds
//     repetitive columns but is not full is padded with zero columns carrying
//     a dummy index so that L = OU_W + r;
//   * index lists are delta encoded (first delta from 0).
// It also gives the expected event counts of one operation.
package tb_map_pkg;
  import rram_pkg::*;

  class pe_map;
    logic signed [7:0]    w      [N_IN][N_OUT];
    logic [XBAR_COLS-1:0] xbar   [N_CU][XBAR_ROWS];
    row_map_t             rmap   [N_CU][XBAR_ROWS];
    idx_entry_t           idx    [N_OU][N_CU];
    int n_rows, n_cols;
    int pairs;            // repetitive physical columns over all CUs and OUs
    int zero_rows;        // bit-plane rows dropped by row compression
    int zero_cols;        // band columns dropped because all bits were 0
    int pads;             // padding columns inserted
    int max_bands;        // most bands any CU needs (before checking the limit)

    function void clear();
      foreach (xbar[k, r]) begin
        xbar[k][r] = '0;
        rmap[k][r] = '0;
      end
      foreach (idx[o, k]) idx[o][k] = '0;
      n_rows = 1; n_cols = 1; pairs = 0; zero_rows = 0; zero_cols = 0; pads = 0; max_bands = 0;
    endfunction

    // random weights: each weight is 0 with probability sparsity_pct/100
    function void random_weights(int sparsity_pct, int n_in_used, int n_out_used);
      foreach (w[i, j]) begin
        if (i >= n_in_used || j >= n_out_used || ($urandom % 100) < sparsity_pct) w[i][j] = 0;
        else w[i][j] = 8'($urandom);
      end
    endfunction

    function void build();
      clear();
      for (int k = 0; k < N_CU; k++) begin
        int rows [$];
        int nb;
        for (int i = 0; i < N_IN; i++) begin
          logic any;
          any = 0;
          for (int j = 0; j < N_OUT; j++) any |= w[i][j][k];
          if (any) rows.push_back(i); else zero_rows++;
        end
        nb = (rows.size() + OU_H - 1) / OU_H;
        if (nb > max_bands) max_bands = nb;
        if (nb > OU_ROWS) nb = OU_ROWS;      // caller checks max_bands
        if (nb > n_rows) n_rows = nb;
        for (int b = 0; b < nb; b++) begin
          logic [OU_H-1:0] pat [N_OUT];
          bit used [N_OUT];
          int pa [$], pb [$], sg [$];
          int nphys, ou;
          for (int i = 0; i < OU_H; i++) begin
            int pr;
            pr = b * OU_H + i;
            if (pr < rows.size()) begin
              rmap[k][pr].valid = 1'b1;
              rmap[k][pr].idx   = IN_AW'(rows[pr]);
            end
          end
          for (int j = 0; j < N_OUT; j++) begin
            used[j] = 0;
            for (int i = 0; i < OU_H; i++) begin
              int pr;
              pr = b * OU_H + i;
              pat[j][i] = (pr < rows.size()) ? w[rows[pr]][j][k] : 1'b0;
            end
          end
          for (int j = 0; j < N_OUT; j++) begin
            if (pat[j] == 0) begin zero_cols++; continue; end
            if (used[j]) continue;
            used[j] = 1;
            begin
              int mate;
              mate = -1;
              for (int j2 = j + 1; j2 < N_OUT; j2++)
                if (!used[j2] && pat[j2] == pat[j]) begin mate = j2; break; end
              if (mate >= 0) begin used[mate] = 1; pa.push_back(j); pb.push_back(mate); end
              else sg.push_back(j);
            end
          end
          // place: pairs first, then singles, OU_W physical columns per OU
          nphys = pa.size() + sg.size();
          ou = 0;
          for (int first = 0; first < nphys; first += OU_W) begin
            int lst [$];
            int r, n, prev;
            r = 0; n = 0;
            for (int c = 0; c < OU_W && first + c < nphys; c++) begin
              int q;
              logic [OU_H-1:0] pt;
              q = first + c;
              if (q < pa.size()) begin
                lst.push_back(pa[q]); lst.push_back(pb[q]); r++;
                pt = pat[pa[q]];
              end else begin
                lst.push_back(sg[q - pa.size()]);
                pt = pat[sg[q - pa.size()]];
              end
              for (int i = 0; i < OU_H; i++) xbar[k][b * OU_H + i][ou * OU_W + c] = pt[i];
              n++;
            end
            pairs += r;
            if (r > 0) while (n < OU_W) begin
              lst.push_back(lst[lst.size() - 1]); n++; pads++;
            end
            begin
              int o;
              o = b * OU_COLS + ou;
              idx[o][k].len = LEN_W'(lst.size());
              prev = 0;
              foreach (lst[s]) begin
                idx[o][k].delta[s] = DELTA_W'(lst[s] - prev);
                prev = lst[s];
              end
            end
            ou++;
          end
          if (ou > n_cols) n_cols = ou;
        end
      end
    endfunction

    function longint dot(logic signed [7:0] x [N_IN], int j);
      longint s;
      s = 0;
      for (int i = 0; i < N_IN; i++) s += longint'(x[i]) * longint'(w[i][j]);
      return s;
    endfunction
  endclass

  // requantisation + activation reference
  function automatic int ref_post(longint acc, int scale, int shift, bit relu);
    longint q;
    q = acc * scale;
    if (shift > 0) q = (q + (longint'(1) << (shift - 1))) >>> shift;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    if (relu && q < 0) q = 0;
    return int'(q);
  endfunction

endpackage
