// compute_crossbar_tb -- programs random cells into the crossbar model and
// checks, for random OUs and wordline bits, that each bitline current equals
// the number of active rows whose cell in that column holds a 1.
module compute_crossbar_tb;
  import rram_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic prog_we = 0;
  logic [6:0] prog_row = 0;
  logic [XBAR_COLS-1:0] prog_data = 0;
  ou_row_t ou_row = 0;
  ou_col_t ou_col = 0;
  logic [OU_H-1:0] wl_bits = 0;
  real bl_current [OU_W];
  compute_crossbar dut (.*);

  logic [XBAR_COLS-1:0] model [XBAR_ROWS];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < XBAR_ROWS; r++) begin
      model[r] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); prog_we = 1; prog_row = 7'(r); prog_data = model[r];
    end
    @(negedge clk); prog_we = 0;
    repeat (500) begin
      ou_row = ou_row_t'($urandom % OU_ROWS); ou_col = ou_col_t'($urandom % OU_COLS);
      wl_bits = OU_H'($urandom);
      #1;
      for (int c = 0; c < OU_W; c++) begin
        int n; n = 0;
        for (int i = 0; i < OU_H; i++) n += int'(wl_bits[i] & model[ou_row * OU_H + i][ou_col * OU_W + c]);
        checks++;
        if (bl_current[c] != real'(n)) begin
          failures++; $display("FAIL col %0d: %f exp %0d", c, bl_current[c], n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
