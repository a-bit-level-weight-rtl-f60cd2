// adc -- BEHAVIOURAL MODEL of the 3-bit ADC that digitises one OU bitline.
//
// The bitline current (in units of one ON-cell current, see compute_crossbar)
// is divided by the LSB current, rounded to the nearest integer and clipped
// to 0..2^ADC_BITS-1; the code is sampled on the rising clock edge when
// `sample` is high and held otherwise. With 1-bit cells and an OU height of 7,
// an ideal column current is 0..7 cell currents, so the 3-bit code is exact:
// the OU height is chosen so that it matches the ADC resolution.
//
// Follows the published design: 3-bit resolution, one ADC per OU column
// (OU width 8 = number of ADCs per CU). Rounding, clipping and the one-cycle
// sampling latency are this model's choices.
module adc
  import rram_pkg::*;
#(
  parameter real I_LSB = 1.0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      sample,
  input  real       i_in,
  output adc_code_t code
);

  localparam int unsigned CODE_MAX = (1 << ADC_BITS) - 1;

  function automatic adc_code_t quantise(real i);
    int q;
    q = $rtoi(i / I_LSB + 0.5);
    if (i <= 0.0)          return '0;
    else if (q > CODE_MAX) return adc_code_t'(CODE_MAX);
    else                   return adc_code_t'(q);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      code <= '0;
    else if (sample) code <= quantise(i_in);
  end

endmodule
