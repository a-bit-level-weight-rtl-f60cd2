// shift_add_tb -- random partial sums for all CUs and input bits; the
// expected contribution of CU k with input bit b is ps * wk * xb with the
// two's-complement bit weights wk = 2^k (k < 7), w7 = -2^7, and likewise xb.
module shift_add_tb;
  import rram_pkg::*;
  logic [N_CU-1:0] cu_valid = '1;
  in_bit_t in_bit = 0;
  adc_code_t ps [N_CU][N_OUT];
  logic signed [ACC_W-1:0] contrib [N_OUT];
  shift_add dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int bw(int i);
    return (i == 7) ? -128 : (1 << i);
  endfunction
  initial begin
    for (int t = 0; t < 64; t++) begin
      in_bit = in_bit_t'(t % 8);
      cu_valid = (t < 16) ? '1 : N_CU'($urandom);
      foreach (ps[k, j]) ps[k][j] = adc_code_t'($urandom);
      #1;
      for (int j = 0; j < N_OUT; j++) begin
        int e; e = 0;
        for (int k = 0; k < N_CU; k++) if (cu_valid[k]) e += int'(ps[k][j]) * bw(k) * bw(int'(in_bit));
        checks++;
        if (int'(contrib[j]) != e) begin failures++; if (failures < 10) $display("FAIL b%0d j%0d %0d exp %0d", in_bit, j, contrib[j], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
