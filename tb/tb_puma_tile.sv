// tb_puma_tile: one tile with two cores, a 1K-word shared memory and the
// network ports looped back onto the tile's own receive buffer (the loop
// accepts flits only some of the time).
//   host  : writes eight words into shared memory [0..7] (count 0, stays valid)
//   core 0: runs a delay loop (branch kills), loads [0..7], stores them to
//           [10..17] with count 1, adds 1.0 and stores again to [10..17]; the
//           second store is blocked until core 1 has consumed the first.
//   core 1: runs a longer delay loop, loads [10..17], stores to [20..27],
//           loads [10..17] again and stores to [28..35].
//   tile  : sends [20..35] to itself on FIFO 2, two words at a time (the
//           FIFO depth), and receives them into [40..55].
// The tile control unit's first send is blocked on [20] until core 1 stores it.
// Checks [40..55] through the host read port and that blocked reads, blocked
// writes, kills and network back-pressure all happened.
module tb_puma_tile;
  import puma_pkg::*;
  import puma_asm_pkg::*;
  localparam int TID = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start, done, no_v, no_r, ni_v, ni_r, gate;
  host_cfg_t cfg; logic [MADDR_W-1:0] h_addr; word_t h_rdata; flit_t no_f, ni_f;

  puma_tile #(.NCORES(2), .SHWORDS(1024), .DIM(128)) dut (
    .clk(clk), .rst_n(rst_n), .tile_id(8'(TID)), .start(start), .done(done),
    .cfg(cfg), .h_addr(h_addr), .h_rdata(h_rdata),
    .net_out_valid(no_v), .net_out_flit(no_f), .net_out_ready(no_r),
    .net_in_valid(ni_v), .net_in_flit(ni_f), .net_in_ready(ni_r)
  );
  assign ni_v = no_v && gate;
  assign ni_f = no_f;
  assign no_r = ni_r && gate;
  always @(negedge clk) gate = ($urandom_range(0, 2) != 0);

  int checks = 0, failures = 0, n_brd = 0, n_bwr = 0, n_kill = 0, n_bp = 0;
  always @(posedge clk) begin
    if (dut.blk_rd) n_brd++;
    if (dut.blk_wr) n_bwr++;
    if (dut.g_core[0].kill_c) n_kill++;
    if (no_v && !no_r) n_bp++;
  end

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("watchdog expired: halted %b tcu %0d pc0 %0d pc1 %0d", dut.halted, dut.t_halted, dut.g_core[0].u_core.pc, dut.g_core[1].u_core.pc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host(hkind_e k, int core, int addr, logic [55:0] data, int count = 0);
    @(negedge clk);
    cfg = '0; cfg.we = 1; cfg.kind = k; cfg.tile = 8'(TID); cfg.core = 3'(core);
    cfg.addr = 16'(addr); cfg.data = data; cfg.count = COUNT_W'(count);
    @(negedge clk); cfg = '0;
  endtask

  initial begin
    instr_t p0 [$], p1 [$], pt [$];
    word_t D [8];
    cfg = '0; start = 0; h_addr = 0; gate = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    p0 = '{ i_set(100, 0), i_set(101, 30), i_set(102, 1),
            i_aluint(SOP_ADD, 100, 100, 102), i_brn(SOP_NE, 100, 101, 3),
            i_load(0, 0, 8), i_store(10, 0, 1, 8),
            i_alui(AOP_ADD, 8, 0, 16'h0100, 8), i_store(10, 8, 1, 8), i_halt() };
    p1 = '{ i_set(100, 0), i_set(101, 80), i_set(102, 1),
            i_aluint(SOP_ADD, 100, 100, 102), i_brn(SOP_NE, 100, 101, 3),
            i_load(0, 10, 8), i_store(20, 0, 1, 8),
            i_load(8, 10, 8), i_store(28, 8, 1, 8), i_halt() };
    // the receive FIFO is two deep, so the loop-back goes two words at a time
    for (int k = 0; k < 8; k++) begin
      pt.push_back(i_send(20 + 2 * k, 2, TID, 2));
      pt.push_back(i_recv(40 + 2 * k, 2, 0, 2));
    end
    pt.push_back(i_halt());
    foreach (p0[k]) host(H_CORE_IMEM, 0, k, p0[k]);
    foreach (p1[k]) host(H_CORE_IMEM, 1, k, p1[k]);
    foreach (pt[k]) host(H_TILE_IMEM, 0, k, pt[k]);
    for (int i = 0; i < 8; i++) begin
      D[i] = word_t'($urandom_range(0, 16'h3fff));
      host(H_SHMEM, 0, i, 56'(D[i]), 0);
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < 16; i++) begin
      h_addr = 16'(40 + i); #0.1;
      checks++;
      if (h_rdata != (i < 8 ? D[i] : D[i - 8] + 16'h0100)) begin
        failures++; $display("word %0d: %h", i, h_rdata);
      end
    end
    checks += 4;
    if (n_brd == 0) begin failures++; $display("no blocked read"); end
    if (n_bwr == 0) begin failures++; $display("no blocked write"); end
    if (n_kill == 0) begin failures++; $display("no kill"); end
    if (n_bp == 0) begin failures++; $display("no network back-pressure"); end
    $display("blocked reads %0d, blocked writes %0d, kills %0d, back-pressure %0d",
             n_brd, n_bwr, n_kill, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
