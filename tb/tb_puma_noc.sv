// tb_puma_noc: the full on-chip network of one node (138 tiles, 7 x 5 mesh of
// routers, concentration 4). Every tile offers random flits to random target
// tiles at a low random rate while every tile accepts at random. The source
// tile and a per-source sequence number travel in the data field. Each flit
// must reach the tile named in its dest field, flits between one pair of
// tiles must arrive in order (XY routing is deterministic), and after a drain
// phase with all tiles ready no flit may be lost or duplicated.
module tb_puma_noc;
  import puma_pkg::*;
  localparam int N = TILES_PER_NODE;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic t_in_valid [N], t_in_ready [N], t_out_valid [N], t_out_ready [N];
  flit_t t_in_flit [N], t_out_flit [N];
  puma_noc dut (.*);

  int checks = 0, failures = 0, sent = 0, recv = 0, n_bp = 0;
  flit_t EXP [N][$];
  logic acc [N];
  logic [7:0] seq [N];

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic take(int t);
    int k; logic found;
    recv++;
    checks++;
    if (int'(t_out_flit[t].dest) != t) begin failures++; $display("flit for %0d at tile %0d", t_out_flit[t].dest, t); end
    found = 0;
    for (k = 0; k < EXP[t].size(); k++)
      if (EXP[t][k].data[15:8] == t_out_flit[t].data[15:8]) begin found = 1; break; end
    checks++;
    if (!found || EXP[t][k] != t_out_flit[t]) begin
      failures++;
      if (failures < 10) $display("order/loss at tile %0d from %0d", t, t_out_flit[t].data[15:8]);
    end else EXP[t].delete(k);
  endtask

  initial begin
    int remaining;
    for (int i = 0; i < N; i++) begin
      acc[i] = 0; seq[i] = 0; t_in_valid[i] = 0; t_in_flit[i] = '0; t_out_ready[i] = 0;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (acc[i]) t_in_valid[i] = 0;
        if (!t_in_valid[i] && c < 2500 && $urandom_range(0, 15) == 0) begin
          t_in_valid[i] = 1;
          t_in_flit[i] = '{rsvd: '0, dest: 8'($urandom_range(0, N - 1)), fifo: 4'($urandom),
                           data: {8'(i), seq[i]}};
          seq[i]++;
        end
        t_out_ready[i] = (c >= 2500) || ($urandom_range(0, 3) != 0);
      end
      #0.5;
      for (int t = 0; t < N; t++)
        if (t_out_valid[t] && t_out_ready[t]) take(t);
      for (int i = 0; i < N; i++) begin
        if (t_in_valid[i] && !t_in_ready[i]) n_bp++;
        if (t_in_valid[i] && t_in_ready[i]) begin
          sent++;
          EXP[int'(t_in_flit[i].dest)].push_back(t_in_flit[i]);
          acc[i] = 1;
        end else acc[i] = 0;
      end
    end
    remaining = 0;
    for (int t = 0; t < N; t++) remaining += EXP[t].size();
    checks += 3;
    if (remaining != 0) begin failures++; $display("%0d flits never arrived", remaining); end
    if (sent < 10000) begin failures++; $display("only %0d flits sent", sent); end
    if (n_bp == 0) begin failures++; $display("network never pushed back"); end
    $display("flits sent %0d received %0d, back-pressure cycles %0d", sent, recv, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
