// tb_puma_shmem: checks the shared memory's valid/count protocol and its
// arbitration with a small memory (4 requesters). Scenarios: a reader of an
// invalid word is blocked until a producer writes it; a word written with
// count 3 serves exactly three reads and then blocks readers again; a writer
// to a valid word is blocked until the last read; count 0 makes a word
// persistent; host writes set valid/count and host reads leave them alone;
// with several requesters eligible each cycle only one is granted, and all
// are eventually served (round robin).
module tb_puma_shmem;
  import puma_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [NP-1:0] req, we, gnt;
  logic [MADDR_W-1:0] addr [NP]; word_t wdata [NP]; logic [COUNT_W-1:0] count [NP];
  word_t rdata, h_wdata, h_rdata; logic blk_rd, blk_wr, h_we;
  logic [MADDR_W-1:0] h_addr; logic [COUNT_W-1:0] h_count;
  puma_shmem #(.WORDS(1024), .NPORT(NP)) dut (.*);
  int checks = 0, failures = 0, nblk_rd = 0, nblk_wr = 0;

  always @(posedge clk) begin
    if (blk_rd) nblk_rd++;
    if (blk_wr) nblk_wr++;
    if (!$onehot0(gnt)) begin failures++; $display("several grants"); end
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got_r1, nr, g;
    req = '0; we = '0; h_we = 0; h_addr = 0; h_wdata = 0; h_count = 0;
    for (int p = 0; p < NP; p++) begin addr[p] = 0; wdata[p] = 0; count[p] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // 1. reader 1 waits for producer 0
    @(negedge clk);
    req[1] = 1; we[1] = 0; addr[1] = 10;
    repeat (5) begin #0.5; chk("blocked read gnt", int'(gnt[1]), 0); @(negedge clk); end
    req[0] = 1; we[0] = 1; addr[0] = 10; wdata[0] = 16'h1111; count[0] = 3;
    #0.5; chk("write granted", int'(gnt[0]), 1); chk("read still blocked", int'(gnt[1]), 0);
    @(negedge clk); req[0] = 0;
    #0.5; chk("read granted", int'(gnt[1]), 1); chk("read data", int'(rdata), 16'h1111);
    @(negedge clk);
    // 2. two more reads allowed, then blocked; writer blocked until then
    req[0] = 1; we[0] = 1; wdata[0] = 16'h2222; count[0] = 1;
    nr = 1;
    for (int c = 0; c < 10; c++) begin
      logic drop0, drop1;
      #0.5;
      drop0 = 0; drop1 = 0;
      if (gnt[1]) begin nr++; chk("reread data", int'(rdata), 16'h1111); end
      if (gnt[0]) begin chk("writer only after 3 reads", nr, 3); drop0 = 1; end
      if (nr == 3) drop1 = 1;
      @(negedge clk);
      if (drop0) req[0] = 0;
      if (drop1) req[1] = 0;
    end
    chk("three reads", nr, 3);
    // now word holds 2222 with count 1
    req[2] = 1; we[2] = 0; addr[2] = 10;
    #0.5; chk("new data", int'(rdata), 16'h2222); chk("gnt2", int'(gnt[2]), 1);
    @(negedge clk); #0.5; chk("consumed", int'(gnt[2]), 0);
    req[2] = 0;
    // 3. host write count 0 = persistent; host read does not consume
    @(negedge clk); h_we = 1; h_addr = 20; h_wdata = 16'h0abc; h_count = 0;
    @(negedge clk); h_we = 0; h_addr = 20; #0.5; chk("host read", int'(h_rdata), 16'h0abc);
    req[3] = 1; addr[3] = 20; we[3] = 0;
    for (int k = 0; k < 5; k++) begin #0.5; chk("persistent read", int'(gnt[3]), 1); @(negedge clk); end
    req[3] = 0;
    // 4. all four read the persistent word at once: each served
    begin
      int served [NP];
      for (int p = 0; p < NP; p++) begin served[p] = 0; req[p] = 1; we[p] = 0; addr[p] = 20; end
      for (int c = 0; c < 8; c++) begin
        #0.5;
        for (int p = 0; p < NP; p++) if (gnt[p]) served[p]++;
        @(negedge clk);
      end
      for (int p = 0; p < NP; p++) chk("round robin", served[p], 2);
      req = '0;
    end
    checks += 2;
    if (nblk_rd == 0) begin failures++; $display("no blocked read"); end
    if (nblk_wr == 0) begin failures++; $display("no blocked write"); end
    $display("blocked reads=%0d blocked writes=%0d", nblk_rd, nblk_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
