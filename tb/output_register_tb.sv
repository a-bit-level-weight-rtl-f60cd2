// output_register_tb -- accumulates random contributions over random cycles
// with clears in between and checks every accumulator against a model sum.
module output_register_tb;
  import rram_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, acc_en = 0;
  always #5 clk = ~clk;
  logic signed [ACC_W-1:0] contrib [N_OUT];
  logic signed [ACC_W-1:0] acc [N_OUT];
  output_register dut (.*);
  int model [N_OUT];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (model[j]) model[j] = 0;
    foreach (contrib[j]) contrib[j] = '0;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      clear = (t % 50) == 0;
      acc_en = !clear && ($urandom % 3 != 0);
      foreach (contrib[j]) contrib[j] = ACC_W'(int'($urandom % 20001) - 10000);
      @(negedge clk);
      foreach (model[j]) begin
        if (clear) model[j] = 0;
        else if (acc_en) model[j] += int'(contrib[j]);
        checks++;
        if (int'(acc[j]) != model[j]) begin failures++; if (failures < 10) $display("FAIL t%0d j%0d", t, j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
