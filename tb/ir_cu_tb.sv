// ir_cu_tb -- fills the IR-CU with random bytes and checks the wordline bits
// presented for every OU row and input bit.
module ir_cu_tb;
  import rram_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [6:0] row = 0;
  logic [7:0] wdata = 0;
  ou_row_t ou_row = 0;
  in_bit_t in_bit = 0;
  logic [OU_H-1:0] wl_bits;
  ir_cu dut (.*);
  logic [7:0] model [XBAR_ROWS];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < XBAR_ROWS; r++) begin
      model[r] = 8'($urandom);
      @(negedge clk); we = 1; row = 7'(r); wdata = model[r];
    end
    @(negedge clk); we = 0;
    for (int o = 0; o < OU_ROWS; o++)
      for (int b = 0; b < A_BITS; b++) begin
        ou_row = ou_row_t'(o); in_bit = in_bit_t'(b); #1;
        for (int i = 0; i < OU_H; i++) begin
          checks++;
          if (wl_bits[i] != model[o * OU_H + i][b]) begin failures++; $display("FAIL o%0d b%0d i%0d", o, b, i); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
