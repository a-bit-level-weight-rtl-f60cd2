// pooling_unit_tb -- random pooling regions of 1..4 windows; after each
// window the output must be the maximum of the region's values so far.
module pooling_unit_tb;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0;
  always #5 clk = ~clk;
  logic signed [7:0] x = 0, y;
  pooling_unit dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    repeat (300) begin
      int n, m;
      n = 1 + $urandom % 4;
      m = -1000;
      for (int w = 0; w < n; w++) begin
        x = 8'($urandom); first = (w == 0); in_valid = 1;
        if (int'(x) > m) m = int'(x);
        @(negedge clk); in_valid = 0; x = 8'($urandom);
        repeat ($urandom % 3) @(negedge clk);
        checks++;
        if (int'(y) != m) begin failures++; $display("FAIL y=%0d exp %0d", y, m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
