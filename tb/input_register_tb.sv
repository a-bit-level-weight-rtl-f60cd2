// input_register_tb -- writes random bytes to random addresses and checks the
// parallel read-out of all N_IN entries.
module input_register_tb;
  import rram_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [IN_AW-1:0] waddr = 0;
  logic [7:0] wdata = 0;
  logic [7:0] data [N_IN];
  input_register dut (.*);
  logic [7:0] model [N_IN];
  int checks = 0, failures = 0;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < N_IN; i++) begin
      model[i] = 8'($urandom);
      @(negedge clk); we = 1; waddr = IN_AW'(i); wdata = model[i];
    end
    repeat (200) begin
      int a; a = $urandom % N_IN; model[a] = 8'($urandom);
      @(negedge clk); we = 1; waddr = IN_AW'(a); wdata = model[a];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < N_IN; i++) begin
      checks++;
      if (data[i] != model[i]) begin failures++; $display("FAIL %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
