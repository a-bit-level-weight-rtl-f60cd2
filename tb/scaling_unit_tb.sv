// scaling_unit_tb -- random accumulators, multipliers and shifts; expected
// value computed in 64-bit integers: round-half-up of acc*scale/2^shift,
// saturated to -128..127.
module scaling_unit_tb;
  import rram_pkg::*;
  logic signed [ACC_W-1:0] acc = 0;
  logic [7:0] scale = 0;
  logic [4:0] shift = 0;
  logic signed [7:0] y;
  scaling_unit dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint p, q;
      acc = ACC_W'($urandom);
      if (t % 3 == 0) acc = ACC_W'(int'($urandom % 4001) - 2000);
      scale = 8'($urandom); shift = 5'($urandom);
      #1;
      p = longint'(acc) * longint'(scale);
      q = (shift == 0) ? p : $floor((real'(p) / real'(longint'(1) << shift)) + 0.5);
      if (q > 127) q = 127;
      if (q < -128) q = -128;
      checks++;
      if (longint'(y) != q) begin failures++; if (failures < 10) $display("FAIL acc=%0d s=%0d sh=%0d y=%0d exp %0d", acc, scale, shift, y, q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
