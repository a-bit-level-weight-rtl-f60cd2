// indexing_crossbar_tb -- writes random index rows to every OU address and
// reads them back in random order, checking data and the one-cycle latency.
module indexing_crossbar_tb;
  import rram_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [OU_AW-1:0] wr_addr = 0, rd_addr = 0;
  idx_entry_t [N_CU-1:0] wr_data = '0, rd_data;
  indexing_crossbar dut (.*);
  idx_entry_t [N_CU-1:0] model [N_OU];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int o = 0; o < N_OU; o++) begin
      for (int k = 0; k < N_CU; k++) begin
        model[o][k].len = LEN_W'($urandom);
        for (int s = 0; s < MAX_IDX; s++) model[o][k].delta[s] = DELTA_W'($urandom);
      end
      @(negedge clk); wr_en = 1; wr_addr = OU_AW'(o); wr_data = model[o];
    end
    @(negedge clk); wr_en = 0;
    repeat (300) begin
      int a; a = $urandom % N_OU;
      rd_en = 1; rd_addr = OU_AW'(a);
      @(negedge clk); rd_en = 0; rd_addr = OU_AW'(a + 1);
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL addr %0d", a); end
      @(negedge clk);
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
