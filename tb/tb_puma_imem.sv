// tb_puma_imem: writes random 56-bit instructions to every address of a core
// instruction memory (585 words) and reads them back.
module tb_puma_imem;
  import puma_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic we; logic [9:0] waddr, raddr; instr_t wdata, rdata;
  puma_imem dut (.*);
  int checks = 0, failures = 0;
  logic [55:0] M [585];
  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int i = 0; i < 585; i++) begin
      M[i] = {24'($urandom), $urandom};
      @(negedge clk); we = 1; waddr = 10'(i); wdata = instr_t'(M[i]);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 585; i++) begin
      raddr = 10'(584 - i); #0.5;
      checks++;
      if (rdata != instr_t'(M[584 - i])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
