// input_decoder_tb -- programs random row-index tables for the eight CUs,
// starts a load and checks every IR-CU write (row order, data = input
// selected by the table or 0 for an unused row), the load length and `done`.
module input_decoder_tb;
  import rram_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic map_we = 0, start = 0;
  logic [2:0] map_cu = 0;
  logic [6:0] map_row = 0;
  row_map_t map_wdata = '0;
  logic [7:0] in_data [N_IN];
  logic busy, done;
  logic [N_CU-1:0] ir_we;
  logic [6:0] ir_row;
  logic [7:0] ir_wdata [N_CU];
  input_decoder dut (.*);
  row_map_t model [N_CU][XBAR_ROWS];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    foreach (in_data[i]) in_data[i] = 8'($urandom);
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < N_CU; k++)
      for (int r = 0; r < XBAR_ROWS; r++) begin
        model[k][r].valid = ($urandom % 4) != 0;
        model[k][r].idx   = IN_AW'($urandom);
        @(negedge clk); map_we = 1; map_cu = 3'(k); map_row = 7'(r); map_wdata = model[k][r];
      end
    @(negedge clk); map_we = 0;
    start = 1; @(negedge clk); start = 0;
    for (int r = 0; r < XBAR_ROWS; r++) begin
      chk(busy && ir_row == 7'(r), $sformatf("row %0d", r));
      for (int k = 0; k < N_CU; k++) begin
        logic [7:0] e;
        e = model[k][r].valid ? in_data[model[k][r].idx] : 8'h0;
        chk(ir_we[k] && ir_wdata[k] == e, $sformatf("cu %0d row %0d", k, r));
      end
      @(negedge clk);
    end
    chk(done && !busy && ir_we == '0, "done after 128 rows");
    @(negedge clk);
    chk(!done, "done is a pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
