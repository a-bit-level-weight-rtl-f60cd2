// global_controller_tb -- global controller with three PE models and a
// model of the global buffer (one-cycle read). A PE model stores what is
// written into its input register; when started it answers after a random
// delay with out[j] = in[j] + p (wrapping), max-pooled over windows when
// pool_first is low. Checks: every active PE receives exactly the bytes of
// its window, inactive PEs are never written or started, and the global
// buffer ends up holding the expected outputs at out_base.
module global_controller_tb;
  import rram_pkg::*;
  localparam int unsigned N_PE = 3, GB_DEPTH = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [N_PE-1:0] active = '0;
  logic [11:0] in_base [N_PE], out_base [N_PE];
  logic [7:0] pool_len = 1;
  logic busy, done;
  logic gb_we;
  logic [11:0] gb_addr;
  logic [7:0] gb_wdata, gb_rdata;
  logic [N_PE-1:0] pe_in_we, pe_start, pe_done;
  logic [IN_AW-1:0] pe_in_addr;
  logic [7:0] pe_in_wdata;
  logic pe_pool_first;
  logic signed [7:0] pe_out [N_PE][N_OUT];
  global_controller #(.N_PE(N_PE), .GB_DEPTH(GB_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  logic [7:0] gb [GB_DEPTH];
  always_ff @(posedge clk) begin
    gb_rdata <= gb[gb_addr];
    if (gb_we) gb[gb_addr] <= gb_wdata;
  end

  logic [7:0] pin [N_PE][N_IN];
  int nwr [N_PE], nstart [N_PE];
  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    int cnt = -1;
    always @(posedge clk) begin
      pe_done[p] <= 1'b0;
      if (pe_in_we[p]) begin pin[p][pe_in_addr] <= pe_in_wdata; nwr[p]++; end
      if (pe_start[p]) begin
        nstart[p]++;
        cnt = 5 + $urandom % 25;
        for (int j = 0; j < N_OUT; j++) begin
          logic signed [7:0] v;
          v = $signed(pin[p][j % N_IN] + 8'(p));
          if (pe_pool_first || v > pe_out[p][j]) pe_out[p][j] <= v;
        end
      end else if (cnt > 0) cnt--;
      else if (cnt == 0) begin pe_done[p] <= 1'b1; cnt = -1; end
    end
  end

  initial begin
    foreach (gb[a]) gb[a] = 8'($urandom);
    for (int p = 0; p < N_PE; p++) begin
      in_base[p] = 12'(p * 512); out_base[p] = 12'(2048 + p * 256);
      nwr[p] = 0; nstart[p] = 0;
    end
    @(negedge clk); rst_n = 1;
    for (int job = 0; job < 2; job++) begin
      logic [7:0] expv [N_PE][N_OUT];
      int npool;
      npool = (job == 0) ? 3 : 1;
      active = (job == 0) ? 3'b101 : 3'b111;
      pool_len = 8'(npool);
      for (int p = 0; p < N_PE; p++) begin
        nwr[p] = 0; nstart[p] = 0;
        for (int j = 0; j < N_OUT; j++) begin
          for (int t = 0; t < npool; t++) begin
            logic signed [7:0] v;
            v = $signed(gb[p * 512 + t * N_IN + j % N_IN] + 8'(p));
            if (t == 0 || v > $signed(expv[p][j])) expv[p][j] = v;
          end
        end
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      for (int p = 0; p < N_PE; p++) begin
        if (active[p]) begin
          chk(nwr[p] == npool * N_IN && nstart[p] == npool, $sformatf("pe %0d transfers %0d starts %0d", p, nwr[p], nstart[p]));
          for (int j = 0; j < N_OUT; j++) chk(gb[2048 + p * 256 + j] == expv[p][j], $sformatf("pe %0d out %0d", p, j));
        end else chk(nwr[p] == 0 && nstart[p] == 0, "inactive PE untouched");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
