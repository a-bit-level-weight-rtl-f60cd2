// scaling_unit -- requantises one accumulator to a signed 8-bit activation.
//
// The network is quantised after training to signed 8-bit weights and
// activations, so every layer output must be brought back to 8 bits:
//     y = sat8( (acc * scale + 2^(shift-1)) >>> shift )
// with an unsigned 8-bit multiplier `scale`, a right shift `shift`
// (0..31, rounding to nearest, half up) and saturation to -128..127.
// Combinational. The published design only names a scaling unit; this
// multiplier-and-shift form is this design's choice.
module scaling_unit
  import rram_pkg::*;
(
  input  logic signed [ACC_W-1:0]  acc,
  input  logic [7:0]               scale,
  input  logic [4:0]               shift,
  output logic signed [A_BITS-1:0] y
);

  localparam int PW = ACC_W + 9;
  logic signed [PW-1:0] prod, rnd, q;

  always_comb begin
    prod = PW'(acc) * $signed({1'b0, scale});
    rnd  = (shift == 0) ? '0 : (PW'(1) <<< (shift - 1));
    q    = (prod + rnd) >>> shift;
    if (q > PW'(127))       y = 8'sd127;
    else if (q < -PW'(128)) y = -8'sd128;
    else                    y = A_BITS'(q);
  end

endmodule
