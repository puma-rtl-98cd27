// tb_puma_recv_buf: drives random flits for random FIFO ids into the receive
// buffer while reading random FIFOs, and checks against 16 reference queues:
// per-FIFO order, in_ready low exactly when the addressed FIFO holds 2 words,
// rd_valid exactly when the selected FIFO is non-empty.
module tb_puma_recv_buf;
  import puma_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_ready, rd_valid, rd_pop; flit_t in_flit; logic [3:0] rd_sel; word_t rd_data;
  puma_recv_buf dut (.*);
  int checks = 0, failures = 0, nfull = 0;
  word_t Q [16][$];

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_flit = '0; rd_sel = 0; rd_pop = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      logic push, pop; int f;
      @(negedge clk);
      f = int'($urandom_range(0, 3));          // few FIFOs -> they fill up
      in_valid = 1'($urandom);
      in_flit = '{rsvd: '0, dest: 8'($urandom), fifo: 4'(f), data: 16'($urandom)};
      rd_sel = 4'($urandom_range(0, 3));
      rd_pop = ($urandom_range(0, 2) == 0);
      #0.5;
      checks += 2;
      if (in_ready != (Q[f].size() < 2)) begin failures++; $display("in_ready wrong"); end
      if (rd_valid != (Q[rd_sel].size() > 0)) begin failures++; $display("rd_valid wrong"); end
      if (!in_ready) nfull++;
      if (rd_valid) begin
        checks++;
        if (rd_data != Q[rd_sel][0]) begin failures++; $display("order wrong"); end
      end
      push = in_valid && in_ready; pop = rd_pop && rd_valid;
      if (pop) void'(Q[rd_sel].pop_front());
      if (push) Q[f].push_back(in_flit.data);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
