// output_register -- PE-buffer output register: one signed accumulator per
// logical output column.
//
// `clear` zeroes all accumulators (start of an operation); `acc_en` adds the
// shift-and-add contributions `contrib[j]` to accumulator j at the rising
// edge. Because of repetitive columns a single ADC code can reach two
// accumulators in the same cycle; that is handled upstream by the output
// decoder and needs no extra port here. The published design names the
// block; accumulation in place is this design's choice.
module output_register
  import rram_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     acc_en,
  input  logic signed [ACC_W-1:0]  contrib [N_OUT],
  output logic signed [ACC_W-1:0]  acc     [N_OUT]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_OUT; j++) acc[j] <= '0;
    end else if (clear) begin
      for (int j = 0; j < N_OUT; j++) acc[j] <= '0;
    end else if (acc_en) begin
      for (int j = 0; j < N_OUT; j++) acc[j] <= acc[j] + contrib[j];
    end
  end

endmodule
