// adc_tb -- drives currents from 0 to beyond full scale and checks the 3-bit
// code (round to nearest, clip at 7), the hold when `sample` is low and the
// one-cycle sampling latency.
module adc_tb;
  import rram_pkg::*;
  logic clk = 0, rst_n = 0, sample = 0;
  always #5 clk = ~clk;
  real i_in = 0.0;
  adc_code_t code;
  adc dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int n = 0; n <= 40; n++) begin
      int e;
      i_in = n * 0.25;                  // 0 .. 10 cell currents
      e = int'($floor(i_in + 0.5));
      if (e > 7) e = 7;
      sample = 1;
      @(negedge clk);
      checks++;
      if (int'(code) != e) begin failures++; $display("FAIL i=%f code=%0d exp %0d", i_in, code, e); end
      sample = 0; i_in = 0.0;
      @(negedge clk);
      checks++;
      if (int'(code) != e) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
