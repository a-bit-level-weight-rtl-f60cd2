// global_buffer -- on-chip activation buffer shared by all PEs.
//
// A byte-wide, two-port memory of DEPTH bytes. Port A belongs to the host
// (loading input activations, reading results), port B to the global
// controller (feeding PE input registers, storing PE outputs). Both ports
// read synchronously: data appear one cycle after the address. When both
// ports write the same address in the same cycle, port B wins. The published
// design names the block only; its size and organisation are this design's
// choices.
module global_buffer #(
  parameter int unsigned DEPTH = 65536
) (
  input  logic                     clk,
  input  logic                     a_we,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  input  logic [7:0]               a_wdata,
  output logic [7:0]               a_rdata,
  input  logic                     b_we,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  input  logic [7:0]               b_wdata,
  output logic [7:0]               b_rdata
);

  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we && !(b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    if (b_we) mem[b_addr] <= b_wdata;
    a_rdata <= mem[a_addr];
    b_rdata <= mem[b_addr];
  end

endmodule
