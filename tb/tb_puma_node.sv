// tb_puma_node: end-to-end test of a PUMA node, reduced to five tiles with
// two cores each on a 2 x 1 router mesh (tiles 0-3 share router 0, tile 4 is
// on router 1) and 1K-word shared memories. Everything is loaded through the
// host configuration port, as on the real node.
//   tile 0 core 0: delay loop (branch kills); loads x (128 words, written by
//          the host) into XbarIn; MVM with host-loaded random weights; reads
//          XbarOut at once (stalls until the MVM is done) and stores y[0..15]
//          to shared memory [200..215]; sigmoid of y[0..7] through the
//          register-file ROM; stores the sigmoids to [200..207] again, which
//          is blocked until core 1 has consumed the first values.
//   tile 0 core 1: delay loop longer than the MVM, loads [200..215] and
//          stores to [500..515], loads [200..207] again and stores to [516..523].
//   tile 0 control unit: sends [500..523] to the last tile, FIFO 1; its reads
//          are blocked until core 1 has stored the words.
//   last tile control unit: receives 24 words from FIFO 1 into [0..23].
//   last tile core 0: loads [0..23] (blocked until they arrive), ReLU, stores
//          to [100..123].
//   all other cores and control units: halt.
// Checks the final words against a reference computed here, and counts MVMs,
// stalls, kills, ROM look-ups, blocked reads, blocked writes and flits
// between routers; a mechanism that never happened is a failure.
module tb_puma_node;
  import puma_pkg::*;
  import puma_asm_pkg::*;
  localparam int NT = 5, MX = 2, MY = 1, NC = 2, SW = 1024;
  localparam int LAST = NT - 1;
  localparam int DIM = XBAR_DIM;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  host_cfg_t cfg; logic start, done; logic [7:0] rd_tile; logic [MADDR_W-1:0] rd_addr; word_t rd_data;

  puma_node #(.NTILES(NT), .MESH_X(MX), .MESH_Y(MY), .NCORES(NC), .SHWORDS(SW)) dut (.*);

  int checks = 0, failures = 0, cycles = 0;
  int n_mvm = 0, n_stall = 0, n_kill = 0, n_rom = 0, n_brd = 0, n_bwr = 0, n_link = 0;
  shortint W [DIM][DIM];
  shortint X [DIM];
  int Y [DIM];

  always @(posedge clk) begin
    cycles++;
    if (dut.g_tile[0].u_tile.g_core[0].u_core.mv_start[0]) n_mvm++;
    if (dut.g_tile[0].u_tile.g_core[0].stall_c) n_stall++;
    if (dut.g_tile[0].u_tile.g_core[0].kill_c) n_kill++;
    if (dut.g_tile[0].u_tile.g_core[0].u_core.rom_req) n_rom++;
    if (dut.g_tile[0].u_tile.blk_rd || dut.g_tile[LAST].u_tile.blk_rd) n_brd++;
    if (dut.g_tile[0].u_tile.blk_wr) n_bwr++;
    if (dut.u_noc.iv[1][3] && dut.u_noc.ir[1][3]) n_link++;
  end

  initial begin
    repeat (2000000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host(hkind_e k, int tile, int core, int addr, logic [55:0] data,
                      int mvmu = 0, int row = 0, int col = 0);
    @(negedge clk);
    cfg = '0; cfg.we = 1; cfg.kind = k; cfg.tile = 8'(tile); cfg.core = 3'(core);
    cfg.addr = 16'(addr); cfg.data = data; cfg.mvmu = 1'(mvmu);
    cfg.row = 7'(row); cfg.col = 7'(col);
    @(negedge clk); cfg = '0;
  endtask

  task automatic chk(string what, int got, int exp, int tol = 0);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 20) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic int relu(int v);
    return v < 0 ? 0 : v;
  endfunction

  initial begin
    instr_t p00 [$], p01 [$], pt0 [$], pl0 [$], ptl [$];
    longint a;
    int t0;
    cfg = '0; start = 0; rd_tile = 0; rd_addr = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    p00 = '{ i_set(100, 0), i_set(101, 20), i_set(102, 1),
             i_aluint(SOP_ADD, 100, 100, 102), i_brn(SOP_NE, 100, 101, 3),
             i_load(XIN_BASE, 0, DIM), i_mvm(1, 0, 0),
             i_store(200, XOUT_BASE, 1, 16),
             i_alu(AOP_SIG, 16, XOUT_BASE, 0, 8),
             i_store(200, 16, 1, 8), i_halt() };
    p01 = '{ i_set(100, 0), i_set(101, 1200), i_set(102, 1),
             i_aluint(SOP_ADD, 100, 100, 102), i_brn(SOP_NE, 100, 101, 3),
             i_load(0, 200, 16), i_store(500, 0, 1, 16),
             i_load(16, 200, 8), i_store(516, 16, 1, 8), i_halt() };
    pt0 = '{ i_send(500, 1, LAST, 24), i_halt() };
    ptl = '{ i_recv(0, 1, 0, 24), i_halt() };
    pl0 = '{ i_load(0, 0, 24), i_alu(AOP_RELU, 30, 0, 0, 24),
             i_store(100, 30, 0, 24), i_halt() };

    for (int t = 0; t < NT; t++) begin
      for (int c = 0; c < NC; c++) host(H_CORE_IMEM, t, c, 0, i_halt());
      host(H_TILE_IMEM, t, 0, 0, i_halt());
    end
    foreach (p00[k]) host(H_CORE_IMEM, 0, 0, k, p00[k]);
    foreach (p01[k]) host(H_CORE_IMEM, 0, 1, k, p01[k]);
    foreach (pt0[k]) host(H_TILE_IMEM, 0, 0, k, pt0[k]);
    foreach (ptl[k]) host(H_TILE_IMEM, LAST, 0, k, ptl[k]);
    foreach (pl0[k]) host(H_CORE_IMEM, LAST, 0, k, pl0[k]);
    for (int r = 0; r < DIM; r++)
      for (int c = 0; c < DIM; c++) begin
        W[r][c] = shortint'($urandom_range(0, 255)) - 128;
        host(H_WEIGHT, 0, 0, 0, 56'(W[r][c]), 0, r, c);
      end
    for (int i = 0; i < DIM; i++) begin
      X[i] = shortint'($urandom_range(0, 511)) - 256;
      host(H_SHMEM, 0, 0, i, 56'(X[i]));
    end
    for (int j = 0; j < DIM; j++) begin
      a = 0;
      for (int r = 0; r < DIM; r++) a += longint'(X[r]) * W[r][j];
      Y[j] = sat16i(a >>> FRAC_BITS);
    end

    @(negedge clk); start = 1; t0 = cycles;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    $display("node ran %0d cycles", cycles - t0);

    rd_tile = 8'(LAST);
    for (int i = 0; i < 24; i++) begin
      rd_addr = 16'(100 + i); #0.1;
      if (i < 16) chk("relu(y)", int'($signed(rd_data)), relu(Y[i]));
      else        chk("sigmoid(y)", int'($signed(rd_data)), rom_value(rom_row(0, Y[i - 16])), 1);
    end
    checks += 7;
    if (n_mvm == 0)   begin failures++; $display("no MVM"); end
    if (n_stall == 0) begin failures++; $display("no stall"); end
    if (n_kill == 0)  begin failures++; $display("no kill"); end
    if (n_rom == 0)   begin failures++; $display("no ROM look-up"); end
    if (n_brd == 0)   begin failures++; $display("no blocked read"); end
    if (n_bwr == 0)   begin failures++; $display("no blocked write"); end
    if (n_link != 24) begin failures++; $display("%0d flits between routers", n_link); end
    $display("mvm %0d stall %0d kill %0d rom %0d blocked-rd %0d blocked-wr %0d link-flits %0d",
             n_mvm, n_stall, n_kill, n_rom, n_brd, n_bwr, n_link);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
