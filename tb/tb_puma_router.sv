// tb_puma_router: checks one router at mesh position (3,2) of a 7-wide mesh.
// Random flits with random targets are offered on all 8 inputs while the
// outputs accept at random. Every flit must leave on the port given by XY
// routing (east/west first, then south/north, then local port dest % 4),
// flits from one input to one output must keep their order, and none may
// be lost or duplicated.
module tb_puma_router;
  import puma_pkg::*;
  localparam int P = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid [P], in_ready [P], out_valid [P], out_ready [P];
  flit_t in_flit [P], out_flit [P];
  logic [7:0] my_x, my_y;
  puma_router dut (.*);
  int checks = 0, failures = 0, sent = 0, recv = 0;
  flit_t EXP [P][$];
  logic acc [P];   // expected per output, tagged with source in rsvd

  function automatic int xy(int dest);
    int r, rx, ry;
    r = dest / 4; rx = r % 7; ry = r / 7;
    if (rx > 3) return 1; if (rx < 3) return 3;
    if (ry > 2) return 2; if (ry < 2) return 0;
    return 4 + dest % 4;
  endfunction

  initial begin
    repeat (30000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    my_x = 3; my_y = 2;
    for (int i = 0; i < P; i++) begin acc[i] = 0; in_valid[i] = 0; in_flit[i] = '0; out_ready[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      for (int i = 0; i < P; i++) begin
        if (acc[i]) in_valid[i] = 0;
        if (!in_valid[i]) begin
          in_valid[i] = (c < 3800) && 1'($urandom);
          in_flit[i] = '{rsvd: 4'(i), dest: 8'($urandom_range(0, 139)), fifo: 4'($urandom), data: 16'(c)};
        end
        out_ready[i] = ($urandom_range(0, 3) != 0);
      end
      #0.5;
      for (int o = 0; o < P; o++)
        if (out_valid[o] && out_ready[o]) begin
          int src; int k; logic found;
          recv++;
          checks++;
          if (xy(int'(out_flit[o].dest)) != o) begin failures++; $display("misroute dest %0d to %0d", out_flit[o].dest, o); end
          // first expected entry of the same source must be this flit
          found = 0;
          for (k = 0; k < EXP[o].size(); k++)
            if (EXP[o][k].rsvd == out_flit[o].rsvd) begin found = 1; break; end
          checks++;
          if (!found || EXP[o][k] != out_flit[o]) begin failures++; $display("order/loss at out %0d", o); end
          else EXP[o].delete(k);
        end
      for (int i = 0; i < P; i++)
        if (in_valid[i] && in_ready[i]) begin
          sent++;
          EXP[xy(int'(in_flit[i].dest))].push_back(in_flit[i]);
          acc[i] = 1;
        end else acc[i] = 0;
    end
    @(negedge clk);
    for (int i = 0; i < P; i++) if (acc[i]) in_valid[i] = 0;
    for (int o = 0; o < P; o++) out_ready[o] = 1;
    repeat (50) begin
      @(negedge clk); #0.5;
      for (int o = 0; o < P; o++) if (out_valid[o]) begin recv++; void'(EXP[o].pop_front()); end
    end
    checks++;
    if (sent != recv || sent < 1000) begin failures++; $display("sent %0d recv %0d", sent, recv); end
    $display("flits %0d", sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
