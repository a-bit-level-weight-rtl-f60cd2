// computation_unit -- one CU of a processing element: the 128-byte input
// register (IR-CU), the 128x128 RRAM computation crossbar with its 1-bit
// wordline DACs, and OU_W = 8 ADCs of 3 bits.
//
// In the bit-split mapping every CU holds one bit position of all weights of
// the PE (CU 7 the sign bits, CU 0 the LSBs), so the partial sums of a CU all
// share one shift value. Each compute cycle one OU (7 rows x 8 columns) is
// active: the IR-CU supplies the 7 input bits of the OU's rows for the current
// input bit, the crossbar sums the cells of each of the 8 columns, and the
// ADCs sample the 8 column currents. The codes (each 0..7) appear on
// `adc_code` one cycle after `ou_valid`, with `code_valid` high.
//
// Ports: IR-CU write port (`ir_we`/`ir_row`/`ir_wdata`), crossbar
// programming port (`prog_we`/`prog_row`/`prog_data`), OU select
// (`ou_valid`/`ou_row`/`ou_col`/`in_bit`). Structure as published; the
// one-cycle ADC latency is this design's choice.
module computation_unit
  import rram_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         ir_we,
  input  logic [$clog2(XBAR_ROWS)-1:0] ir_row,
  input  logic [A_BITS-1:0]            ir_wdata,
  input  logic                         prog_we,
  input  logic [$clog2(XBAR_ROWS)-1:0] prog_row,
  input  logic [XBAR_COLS-1:0]         prog_data,
  input  logic                         ou_valid,
  input  ou_row_t                      ou_row,
  input  ou_col_t                      ou_col,
  input  in_bit_t                      in_bit,
  output adc_code_t                    adc_code [OU_W],
  output logic                         code_valid
);

  logic [OU_H-1:0] wl_bits;
  real             bl_current [OU_W];

  ir_cu u_ir_cu (
    .clk, .we(ir_we), .row(ir_row), .wdata(ir_wdata),
    .ou_row, .in_bit, .wl_bits
  );

  compute_crossbar u_xbar (
    .clk, .prog_we, .prog_row, .prog_data,
    .ou_row, .ou_col, .wl_bits, .bl_current
  );

  for (genvar c = 0; c < OU_W; c++) begin : g_adc
    adc u_adc (.clk, .rst_n, .sample(ou_valid), .i_in(bl_current[c]), .code(adc_code[c]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) code_valid <= 1'b0;
    else        code_valid <= ou_valid;
  end

endmodule
