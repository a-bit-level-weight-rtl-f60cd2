// shift_add -- shift-and-add / shift-and-subtract of the routed partial sums.
//
// With two's-complement weights and inputs of B = 8 bits, the product splits
// into four terms (sign x sign, sign x magnitude, magnitude x sign,
// magnitude x magnitude). A partial sum of weight bit k (CU k) taken with
// input bit b therefore has weight 2^(k+b), and is subtracted when exactly
// one of the two bits is a sign bit (k = B-1 xor b = B-1); the sign x sign
// term is added. Per logical output column j this block forms, in one cycle,
//     contrib[j] = sum_k  (+/-) ps[k][j] << (k + b)
// over the CUs whose `cu_valid` is set. It is purely combinational; the
// output register accumulates the contributions.
//
// The add/subtract rule is that of the published design (sign column with
// magnitude input bits, magnitude columns with the sign input bit). Doing
// all eight CUs and all output columns in one parallel adder tree is this
// design's choice.
module shift_add
  import rram_pkg::*;
(
  input  logic [N_CU-1:0]        cu_valid,
  input  in_bit_t                in_bit,
  input  adc_code_t              ps [N_CU][N_OUT],
  output logic signed [ACC_W-1:0] contrib [N_OUT]
);

  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      contrib[j] = '0;
      for (int k = 0; k < N_CU; k++) begin
        logic signed [ACC_W-1:0] term;
        term = ACC_W'($unsigned(ps[k][j])) <<< (k + int'(in_bit));
        if (cu_valid[k]) begin
          if ((k == W_BITS - 1) != (32'(in_bit) == A_BITS - 1))
            contrib[j] = contrib[j] - term;
          else
            contrib[j] = contrib[j] + term;
        end
      end
    end
  end

endmodule
