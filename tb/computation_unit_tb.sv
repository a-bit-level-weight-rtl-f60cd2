// computation_unit_tb -- programs a random crossbar and random IR-CU inputs,
// then issues random OUs and input bits and checks the eight ADC codes one
// cycle later against the count of rows whose input bit and cell are both 1.
module computation_unit_tb;
  import rram_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ir_we = 0, prog_we = 0, ou_valid = 0;
  logic [6:0] ir_row = 0, prog_row = 0;
  logic [7:0] ir_wdata = 0;
  logic [XBAR_COLS-1:0] prog_data = 0;
  ou_row_t ou_row = 0;
  ou_col_t ou_col = 0;
  in_bit_t in_bit = 0;
  adc_code_t adc_code [OU_W];
  logic code_valid;
  computation_unit dut (.*);
  logic [XBAR_COLS-1:0] cells [XBAR_ROWS];
  logic [7:0] inp [XBAR_ROWS];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < XBAR_ROWS; r++) begin
      cells[r] = {$urandom, $urandom, $urandom, $urandom};
      inp[r] = 8'($urandom);
      @(negedge clk); prog_we = 1; prog_row = 7'(r); prog_data = cells[r];
      ir_we = 1; ir_row = 7'(r); ir_wdata = inp[r];
    end
    @(negedge clk); prog_we = 0; ir_we = 0;
    repeat (400) begin
      int o, c, b;
      o = $urandom % OU_ROWS; c = $urandom % OU_COLS; b = $urandom % A_BITS;
      ou_valid = 1; ou_row = ou_row_t'(o); ou_col = ou_col_t'(c); in_bit = in_bit_t'(b);
      @(negedge clk);
      ou_valid = 0;
      checks++;
      if (!code_valid) begin failures++; $display("FAIL code_valid"); end
      for (int cc = 0; cc < OU_W; cc++) begin
        int n; n = 0;
        for (int i = 0; i < OU_H; i++) n += int'(inp[o * OU_H + i][b] & cells[o * OU_H + i][c * OU_W + cc]);
        checks++;
        if (int'(adc_code[cc]) != n) begin failures++; $display("FAIL code %0d exp %0d", adc_code[cc], n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
