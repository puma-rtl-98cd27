// tb_puma_mvmu: self-checking test of the matrix-vector multiplication unit.
// Loads a random signed 128x128 weight matrix through the serial write port,
// fills XbarIn with random signed inputs, runs MVMs with and without input
// shuffling (filter*stride rotation) and compares every XbarOut word with a
// product computed here in 64-bit integers, scaled to Q8.8 and saturated.
// Also checks the MVM latency (16 input bits x 128 columns + 1 cycles) and
// that busy covers the operation.
module tb_puma_mvmu;
  import puma_pkg::*;
  localparam int DIM = 128;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic xin_we; logic [6:0] xin_addr; word_t xin_wdata;
  word_t xin [DIM]; word_t xout [DIM];
  logic start; logic [9:0] filter, stride; logic busy, done;
  logic w_we; logic [6:0] w_row, w_col; word_t w_data;

  puma_mvmu dut (.*);

  int checks = 0, failures = 0;
  shortint W [DIM][DIM];
  shortint X [DIM];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_mvm(input int f, input int s);
    int cyc;
    longint acc, e;
    int off;
    @(negedge clk);
    start = 1; filter = 10'(f); stride = 10'(s);
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      checks++; if (!busy) begin failures++; $display("busy low during MVM"); end
      @(negedge clk); cyc++;
    end
    checks++;
    if (cyc != 16 * DIM + 1) begin failures++; $display("latency %0d", cyc); end
    @(negedge clk);
    off = (f * s) % DIM;
    for (int j = 0; j < DIM; j++) begin
      acc = 0;
      for (int r = 0; r < DIM; r++) acc += longint'(X[(r + off) % DIM]) * longint'(W[r][j]);
      acc = acc >>> FRAC_BITS;
      e = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : acc;
      checks++;
      if ($signed(xout[j]) != e) begin
        failures++;
        if (failures < 10) $display("col %0d: got %0d exp %0d", j, $signed(xout[j]), e);
      end
    end
  endtask

  initial begin
    xin_we = 0; start = 0; w_we = 0; filter = 0; stride = 0;
    xin_addr = 0; xin_wdata = 0; w_row = 0; w_col = 0; w_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < DIM; r++)
      for (int c = 0; c < DIM; c++) begin
        W[r][c] = shortint'($urandom_range(0, 1023)) - 512;   // +-2.0 in Q8.8
        if (r == 0 && c < 4) W[r][c] = (c == 0) ? 16'sh7fff : (c == 1) ? -16'sh8000 : 16'sh0100;
        @(negedge clk);
        w_we = 1; w_row = 7'(r); w_col = 7'(c); w_data = W[r][c];
      end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < DIM; i++) begin
        X[i] = shortint'($urandom_range(0, 2047)) - 1024;      // +-4.0
        if (t == 2) X[i] = (i % 2 == 0) ? 16'sh7fff : -16'sh8000; // saturation case
        @(negedge clk);
        xin_we = 1; xin_addr = 7'(i); xin_wdata = X[i];
      end
      @(negedge clk); xin_we = 0;
      for (int i = 0; i < DIM; i++) begin checks++; if (xin[i] != word_t'(X[i])) failures++; end
      run_mvm(0, 0);
      run_mvm(3, 5 + t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
