// nonlinear_unit_tb -- all 256 inputs with ReLU on and off.
module nonlinear_unit_tb;
  logic relu_en = 0;
  logic signed [7:0] x = 0, y;
  nonlinear_unit dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int e = 0; e < 2; e++)
      for (int v = -128; v < 128; v++) begin
        int exp_y;
        relu_en = e[0]; x = 8'(v); #1;
        exp_y = (e == 1 && v < 0) ? 0 : v;
        checks++;
        if (int'(y) != exp_y) begin failures++; $display("FAIL en=%0d x=%0d y=%0d", e, v, y); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
