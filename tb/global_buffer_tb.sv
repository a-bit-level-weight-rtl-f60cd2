// global_buffer_tb -- random writes and reads on both ports, checking read
// data one cycle after the address and port B winning a write collision.
module global_buffer_tb;
  localparam int unsigned DEPTH = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_we = 0, b_we = 0;
  logic [9:0] a_addr = 0, b_addr = 0;
  logic [7:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  global_buffer #(.DEPTH(DEPTH)) dut (.*);
  logic [7:0] model [DEPTH];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = 8'($urandom);
      @(negedge clk); a_we = 1; a_addr = 10'(i); a_wdata = model[i];
    end
    @(negedge clk); a_we = 0;
    repeat (2000) begin
      logic [9:0] ra, rb;
      logic [7:0] ea, eb;
      a_we = ($urandom % 3) == 0; b_we = ($urandom % 3) == 0;
      a_addr = 10'($urandom); b_addr = ($urandom % 8 == 0) ? a_addr : 10'($urandom);
      a_wdata = 8'($urandom); b_wdata = 8'($urandom);
      ra = a_addr; rb = b_addr; ea = model[ra]; eb = model[rb];
      @(negedge clk);
      checks += 2;
      if (a_rdata != ea) begin failures++; $display("FAIL a"); end
      if (b_rdata != eb) begin failures++; $display("FAIL b"); end
      if (a_we) model[ra] = a_wdata;
      if (b_we) model[rb] = b_wdata;
      a_we = 0; b_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
