// output_decoder_tb -- builds random OU column lists (r repetitive columns
// first, then single ones, L = OU_W + r when r > 0, otherwise L <= OU_W),
// delta encodes them and checks that every logical column receives the code
// of the physical column it belongs to and that no other column is hit.
module output_decoder_tb;
  import rram_pkg::*;
  logic valid = 0;
  adc_code_t code [OU_W];
  idx_entry_t entry = '0;
  adc_code_t ps [N_OUT];
  logic hit [N_OUT];
  logic [3:0] n_rep;
  output_decoder dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    for (int t = 0; t < 400; t++) begin
      int r, nsingle, lst [$], pc [$], expc [N_OUT], prev;
      bit taken [N_OUT];
      lst.delete(); pc.delete();
      foreach (taken[j]) begin taken[j] = 0; expc[j] = -1; end
      r = $urandom % (OU_W + 1);
      nsingle = (r > 0) ? OU_W - r : $urandom % (OU_W + 1);
      for (int c = 0; c < OU_W; c++) code[c] = adc_code_t'($urandom);
      for (int c = 0; c < r + nsingle; c++) begin
        int nidx;
        nidx = (c < r) ? 2 : 1;
        for (int q = 0; q < nidx; q++) begin
          int j;
          do j = $urandom % N_OUT; while (taken[j]);
          taken[j] = 1; lst.push_back(j); pc.push_back(c); expc[j] = int'(code[c]);
        end
      end
      entry = '0;
      entry.len = LEN_W'(lst.size());
      prev = 0;
      foreach (lst[s]) begin entry.delta[s] = DELTA_W'(lst[s] - prev); prev = lst[s]; end
      valid = (t % 10) != 9;
      #1;
      chk(int'(n_rep) == (valid ? r : 0), "n_rep");
      for (int j = 0; j < N_OUT; j++) begin
        if (valid && expc[j] >= 0) chk(hit[j] && int'(ps[j]) == expc[j], $sformatf("col %0d", j));
        else chk(!hit[j] && ps[j] == 0, $sformatf("col %0d not hit", j));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
