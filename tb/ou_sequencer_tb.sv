// ou_sequencer_tb -- for random OU regions in both orders, records the issued
// (input bit, OU row, OU column) sequence and compares it with the nested
// loops of the order; also checks the cycle count A_BITS*n_rows*n_cols (and
// 8*18*16 = 2304 for the full crossbar), `last`, and the wordline-reuse flag.
module ou_sequencer_tb;
  import rram_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  direction_e direction = DIR_HORIZONTAL;
  logic [4:0] n_rows = 1, n_cols = 1;
  logic busy, valid, wl_reuse, last;
  in_bit_t in_bit; ou_row_t ou_row; ou_col_t ou_col;
  ou_sequencer dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #10_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int nr, nc, n, exp_b [$], exp_r [$], exp_c [$];
      exp_b.delete(); exp_r.delete(); exp_c.delete();
      if (t == 0) begin nr = OU_ROWS; nc = OU_COLS; end
      else begin nr = 1 + $urandom % OU_ROWS; nc = 1 + $urandom % OU_COLS; end
      direction = direction_e'(t % 2);
      for (int b = 0; b < A_BITS; b++)
        if (direction == DIR_HORIZONTAL) begin
          for (int r = 0; r < nr; r++) for (int c = 0; c < nc; c++) begin exp_b.push_back(b); exp_r.push_back(r); exp_c.push_back(c); end
        end else begin
          for (int c = 0; c < nc; c++) for (int r = 0; r < nr; r++) begin exp_b.push_back(b); exp_r.push_back(r); exp_c.push_back(c); end
        end
      n_rows = 5'(nr); n_cols = 5'(nc);
      start = 1; @(negedge clk); start = 0;
      n = 0;
      while (valid) begin
        chk(n < exp_b.size() && int'(in_bit) == exp_b[n] && int'(ou_row) == exp_r[n] && int'(ou_col) == exp_c[n],
            $sformatf("step %0d", n));
        chk(last == (n == exp_b.size() - 1), "last");
        chk(wl_reuse == (direction == DIR_HORIZONTAL && exp_c[n] != 0), "wl_reuse");
        n++;
        @(negedge clk);
      end
      chk(n == A_BITS * nr * nc, $sformatf("count %0d", n));
      if (t == 0) chk(n == 2304, "full crossbar takes 2304 cycles");
      chk(!busy, "idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
