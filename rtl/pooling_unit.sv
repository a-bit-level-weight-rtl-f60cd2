// pooling_unit -- max pooling of one output channel over successive
// operations of the PE.
//
// Each PE operation produces one output vector for one input window. For
// max pooling, the windows of a pooling region are run one after the other,
// and this unit keeps the running maximum: on `in_valid` with `first` high
// the register is loaded with `x`, otherwise it takes max(register, x). The
// result on `y` is the pooled value once the last window of the region has
// been run; with one window per region (first always high) the unit passes
// the single value through, i.e. no pooling. One cycle latency. The
// published design only names a pooling unit; max pooling over successive
// operations is this design's choice.
module pooling_unit
  import rram_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic signed [A_BITS-1:0] x,
  output logic signed [A_BITS-1:0] y
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             y <= '0;
    else if (in_valid) begin
      if (first || x > y)   y <= x;
    end
  end

endmodule
