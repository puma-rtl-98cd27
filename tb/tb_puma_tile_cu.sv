// tb_puma_tile_cu: runs a tile program of receive, send, receive, halt on the
// tile control unit. Shared memory, receive FIFOs and the router are modelled
// here with random grants, random arrival of words and random ready. Checks
// the words written to memory (address, data, count), the flits sent
// (target, fifo-id, data, order), that the unit waits for FIFO data, and halt.
module tb_puma_tile_cu;
  import puma_pkg::*;
  import puma_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start, halted, mem_req, mem_we, mem_gnt, net_valid, net_ready, rb_valid, rb_pop;
  logic [10:0] pc; instr_t instr; logic [MADDR_W-1:0] mem_addr; word_t mem_wdata, mem_rdata, rb_data;
  logic [COUNT_W-1:0] mem_count; flit_t net_flit; logic [3:0] rb_sel;
  puma_tile_cu dut (.*);
  int checks = 0, failures = 0, n_wait_rb = 0;
  instr_t prog [8];
  word_t MEM [1024];
  logic [COUNT_W-1:0] CNT [1024];
  word_t FQ [16][$];
  flit_t SENT [$];

  assign instr = prog[pc[2:0]];
  // queue contents are sampled half a cycle after each clock edge
  always @(clk) begin
    #0.5;
    rb_valid = FQ[rb_sel].size() > 0;
    rb_data  = rb_valid ? FQ[rb_sel][0] : '0;
  end
  assign mem_rdata = MEM[mem_addr[9:0]];

  always @(negedge clk) begin
    mem_gnt   = mem_req && ($urandom_range(0, 2) != 0);
    net_ready = ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) begin
    if (dut.st == dut.T_RX && !rb_valid) n_wait_rb++;
    if (mem_req && mem_gnt && mem_we) begin MEM[mem_addr[9:0]] <= mem_wdata; CNT[mem_addr[9:0]] <= mem_count; end
    if (rb_pop) void'(FQ[rb_sel].pop_front());
    if (net_valid && net_ready) SENT.push_back(net_flit);
  end

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; mem_gnt = 0; net_ready = 0;
    prog[0] = i_recv(100, 3, 2, 4);
    prog[1] = i_send(200, 5, 9, 6);
    prog[2] = i_recv(300, 7, 1, 2);
    prog[3] = i_halt();
    for (int k = 4; k < 8; k++) prog[k] = i_halt();
    for (int i = 0; i < 1024; i++) begin MEM[i] = 16'(i * 3); CNT[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // words arrive late and in pieces
    repeat (10) @(negedge clk);
    FQ[3].push_back(16'hA000); FQ[3].push_back(16'hA001);
    repeat (10) @(negedge clk);
    FQ[3].push_back(16'hA002); FQ[3].push_back(16'hA003);
    FQ[7].push_back(16'hB000); FQ[7].push_back(16'hB001);
    while (!halted) @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      checks += 2;
      if (MEM[100 + i] != 16'hA000 + 16'(i)) begin failures++; $display("recv word %0d", i); end
      if (CNT[100 + i] != 2) failures++;
    end
    for (int i = 0; i < 2; i++) begin checks++; if (MEM[300 + i] != 16'hB000 + 16'(i) || CNT[300 + i] != 1) failures++; end
    checks++;
    if (SENT.size() != 6) begin failures++; $display("sent %0d flits", SENT.size()); end
    foreach (SENT[k]) begin
      checks++;
      if (SENT[k].dest != 9 || SENT[k].fifo != 5 || SENT[k].data != 16'((200 + k) * 3)) begin
        failures++; $display("flit %0d wrong", k);
      end
    end
    checks++;
    if (n_wait_rb == 0) begin failures++; $display("never waited for FIFO data"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
