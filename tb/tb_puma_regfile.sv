// tb_puma_regfile: checks the ROM-embedded register file. Fills the RAM with
// random data, reads it back on both ports, then performs ROM look-ups of
// rows of every table: the ROM word must equal the table value computed
// here from the function (within one LSB of rounding), the look-up must take
// 4 cycles, and the RAM row used for the look-up must hold its old data
// afterwards. Also checks a write presented in the ROM read cycle.
module tb_puma_regfile;
  import puma_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [8:0] ra, rb, wa, rom_row; word_t rda, rdb, wd, rom_data;
  logic we, rom_req, rom_busy, rom_valid;
  puma_regfile dut (.*);
  int checks = 0, failures = 0;
  word_t M [512];

  function automatic int expect_rom(int row);
    int f, i; real x, v;
    f = row / 128; i = row % 128;
    x = (f == 2) ? i / 8.0 + 1.0 / 16 : (i - 64) / 8.0 + 1.0 / 16;
    case (f)
      0: v = 1.0 / (1.0 + $exp(-x));
      1: v = ($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x));
      2: v = $ln(x);
      default: v = $exp(x);
    endcase
    if (v > 127.996) v = 127.996;
    return int'($rtoi(v * 256.0 + ((v < 0) ? -0.5 : 0.5)));
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; rom_req = 0; ra = 0; rb = 0; wa = 0; wd = 0; rom_row = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 512; i++) begin
      M[i] = 16'($urandom);
      @(negedge clk); we = 1; wa = 9'(i); wd = M[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 512; i++) begin
      ra = 9'(i); rb = 9'(511 - i); #0.5;
      checks += 2;
      if (rda != M[i]) failures++;
      if (rdb != M[511 - i]) failures++;
    end
    for (int k = 0; k < 64; k++) begin
      int row, cyc, got, ex;
      row = (k < 4) ? k * 128 + 70 : int'($urandom_range(0, 511));
      @(negedge clk); rom_req = 1; rom_row = 9'(row);
      @(negedge clk); rom_req = 0; cyc = 1;
      while (!rom_valid) begin @(negedge clk); cyc++; end
      got = int'($signed(rom_data));
      ex = expect_rom(row);
      checks += 2;
      if (cyc != 4) begin failures++; $display("ROM latency %0d", cyc); end
      if (got - ex > 1 || ex - got > 1) begin failures++; $display("row %0d got %0d exp %0d", row, got, ex); end
      if (k == 5) begin we = 1; wa = 9'(row); wd = 16'h1234; M[row] = 16'h1234; end
      @(negedge clk); we = 0;
      ra = 9'(row); #0.5;
      checks++;
      if (rda != M[row]) begin failures++; $display("RAM row %0d not restored", row); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
