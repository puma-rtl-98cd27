// tb_puma_core: end-to-end test of one core running a program that uses every
// execution mechanism: vector load straight into XbarIn, copy between
// MVMUs, a coalesced MVM on both MVMUs (mask = 3) that overlaps an
// independent instruction, a stall on the busy MVMU's XbarOut, vector add,
// a transcendental (sigmoid) look-up in the register-file ROM, immediate
// multiply, vector store, a counted loop (ALUint + brn, with kills) and a
// jmp over an instruction. The shared memory is modelled here and grants
// requests only some of the time, so the memory unit has to wait.
// All results are compared with values computed here.
module tb_puma_core;
  import puma_pkg::*;
  import puma_asm_pkg::*;
  localparam int DIM = 128;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start, halted, im_we, w_we, w_mvmu, mem_req, mem_we, mem_gnt, stall, kill;
  logic [9:0] im_waddr; instr_t im_wdata;
  logic [6:0] w_row, w_col; word_t w_data, mem_wdata, mem_rdata;
  logic [MADDR_W-1:0] mem_addr; logic [COUNT_W-1:0] mem_count;

  puma_core dut (.*);

  int checks = 0, failures = 0, cycles = 0, n_stall = 0, n_kill = 0, n_wait = 0;
  shortint W [2][DIM][DIM];
  shortint X [DIM];
  word_t MEM [4096];
  instr_t prog [$];

  always @(posedge clk) begin
    cycles++;
    if (stall) n_stall++;
    if (kill) n_kill++;
    if (mem_req && !mem_gnt) n_wait++;
  end

  // shared-memory model: random grants, same-cycle read data
  always_comb mem_rdata = MEM[mem_addr[11:0]];
  always @(negedge clk) mem_gnt = mem_req && ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (mem_req && mem_gnt && mem_we) MEM[mem_addr[11:0]] <= mem_wdata;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp, int tol = 0);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 20) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    int y0, y1, s, t0;
    longint a0, a1;
    start = 0; im_we = 0; w_we = 0; w_mvmu = 0; im_waddr = 0; im_wdata = '0;
    w_row = 0; w_col = 0; w_data = 0; mem_gnt = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    prog = '{
      i_set(0, 0),                         // 0  r0 = 0   loop counter
      i_set(1, 3),                         // 1  r1 = 3   bound
      i_set(2, 1),                         // 2  r2 = 1
      i_load(XIN_BASE, 0, DIM),            // 3  XbarIn0 <- mem[0..127]
      i_copy(XIN_BASE + DIM, XIN_BASE, DIM), // 4 XbarIn1 <- XbarIn0
      i_mvm(3, 0, 0),                      // 5  both MVMUs
      i_alu(AOP_ADD, 100, 2, 2, 1),        // 6  r100 = r2 + r2 (overlaps MVM)
      i_alu(AOP_ADD, 200, XOUT_BASE, XOUT_BASE + DIM, DIM), // 7 stalls on MVM
      i_alu(AOP_SIG, 330, 200, 0, 8),      // 8  sigmoid via ROM
      i_store(1000, 200, 1, DIM),          // 9  mem[1000..] <- r200..
      i_aluint(SOP_ADD, 0, 0, 2),          // 10 r0++
      i_brn(SOP_NE, 0, 1, 10),             // 11 loop while r0 != r1
      i_alui(AOP_MUL, 340, 200, 16'h0180, 4), // 12 r340 = r200 * 1.5
      i_jmp(15),                           // 13
      i_set(0, 99),                        // 14 skipped
      i_halt()                             // 15
    };
    foreach (prog[k]) begin
      @(negedge clk); im_we = 1; im_waddr = 10'(k); im_wdata = prog[k];
    end
    for (int m = 0; m < 2; m++)
      for (int r = 0; r < DIM; r++)
        for (int c = 0; c < DIM; c++) begin
          W[m][r][c] = shortint'($urandom_range(0, 255)) - 128;
          @(negedge clk); im_we = 0; w_we = 1; w_mvmu = 1'(m); w_row = 7'(r); w_col = 7'(c); w_data = W[m][r][c];
        end
    @(negedge clk); w_we = 0;
    for (int i = 0; i < DIM; i++) begin X[i] = shortint'($urandom_range(0, 511)) - 256; MEM[i] = X[i]; end

    @(negedge clk); start = 1; t0 = cycles;
    @(negedge clk); start = 0;
    while (!halted) @(negedge clk);
    $display("program ran %0d cycles", cycles - t0);

    for (int j = 0; j < DIM; j++) begin
      a0 = 0; a1 = 0;
      for (int r = 0; r < DIM; r++) begin
        a0 += longint'(X[r]) * W[0][r][j];
        a1 += longint'(X[r]) * W[1][r][j];
      end
      y0 = sat16i(a0 >>> 8); y1 = sat16i(a1 >>> 8);
      s = sat16i(y0 + y1);
      chk("xout0", int'($signed(dut.xout[0][j])), y0);
      chk("xout1", int'($signed(dut.xout[1][j])), y1);
      chk("sum", int'($signed(dut.u_rf.ram[200 + j])), s);
      chk("store", int'($signed(MEM[1000 + j])), s);
      if (j < 8) chk("sigmoid", int'($signed(dut.u_rf.ram[330 + j])), rom_value(rom_row(0, s)), 1);
      if (j < 4) chk("mul", int'($signed(dut.u_rf.ram[340 + j])), sat16i((longint'(s) * 384) >>> 8));
    end
    chk("loop counter", int'(dut.u_rf.ram[0]), 3);
    chk("r100", int'(dut.u_rf.ram[100]), 2);
    checks += 3;
    if (n_stall == 0) begin failures++; $display("no stall seen"); end
    if (n_kill < 3) begin failures++; $display("kills %0d", n_kill); end
    if (n_wait == 0) begin failures++; $display("memory never waited"); end
    $display("stalls=%0d kills=%0d mem_waits=%0d", n_stall, n_kill, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
