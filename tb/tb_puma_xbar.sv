// tb_puma_xbar: checks the crossbar model. Writes random 2-bit cells, applies
// random row-bit vectors and compares the ADC value of every column with the
// sum of the driven cells computed here.
module tb_puma_xbar;
  localparam int DIM = 128;
  logic clk = 0;
  always #1 clk = ~clk;
  logic w_we; logic [6:0] w_row, w_col; logic [1:0] w_cell;
  logic [DIM-1:0] dac_bits; logic [6:0] col_sel; logic [8:0] adc_out;
  puma_xbar dut (.*);
  int checks = 0, failures = 0;
  logic [1:0] G [DIM][DIM];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; w_row = 0; w_col = 0; w_cell = 0; dac_bits = '0; col_sel = 0;
    for (int r = 0; r < DIM; r++)
      for (int c = 0; c < DIM; c++) begin
        G[r][c] = 2'($urandom);
        @(negedge clk); w_we = 1; w_row = 7'(r); w_col = 7'(c); w_cell = G[r][c];
      end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 8; t++) begin
      for (int r = 0; r < DIM; r++) dac_bits[r] = (t == 0) ? 1'b1 : 1'($urandom);
      for (int c = 0; c < DIM; c++) begin
        int s;
        s = 0;
        for (int r = 0; r < DIM; r++) if (dac_bits[r]) s += G[r][c];
        col_sel = 7'(c);
        #0.5;
        checks++;
        if (int'(adc_out) != s) begin failures++; $display("col %0d got %0d exp %0d", c, adc_out, s); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
