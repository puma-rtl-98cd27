// puma_router: one router of the on-chip network: a 2-D mesh with four
// network ports (north, east, south, west) and a concentration of CONC tiles
// per router, so 4 + CONC ports in all.
//
// Every flit is a single-flit packet that carries its target tile. Each
// input port has a 2-entry FIFO. The head of each FIFO is routed
// dimension-order (X first, then Y; deadlock free on a mesh): the target
// tile's router is dest / CONC at column (dest/CONC) % MESH_X and row
// (dest/CONC) / MESH_X; at the target router the flit leaves on local port
// dest % CONC. Each output grants one requesting input per cycle,
// round-robin. Input FIFOs make in_ready a registered signal, so no
// combinational path runs from router to router.
//
// Ports 0..3 = N (y-1), E (x+1), S (y+1), W (x-1); ports 4.. = local tiles.
// Published: 32-bit flits, 4 ports, concentration 4. Own choices: mesh
// topology and its shape, XY routing, buffer depth, single-flit packets.
//
// in_ready depends only on the registered FIFO occupancy (not full), never
// on out_ready, so router-to-router links form no combinational loop. When
// routers are wired into a mesh, lint reports a circular path through the
// out_ready array: in_ready and the pop logic that reads out_ready are
// computed in one combinational block and the arrays are treated as single
// signals. The warning stands because the path is not real.
module puma_router
  import puma_pkg::*;
#(
  parameter int unsigned MESH_X = 7,
  parameter int unsigned NCONC  = CONC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  my_x,
  input  logic [7:0]  my_y,
  input  logic        in_valid  [4+NCONC],
  input  flit_t       in_flit   [4+NCONC],
  output logic        in_ready  [4+NCONC],
  output logic        out_valid [4+NCONC],
  output flit_t       out_flit  [4+NCONC],
  input  logic        out_ready [4+NCONC]
);
  localparam int unsigned P  = 4 + NCONC;
  localparam int unsigned PW = $clog2(P);

  flit_t         q    [P][2];
  logic          qwp  [P];
  logic          qrp  [P];
  logic [1:0]    qn   [P];
  logic [PW-1:0] route [P];
  logic [PW-1:0] ptr  [P];
  logic [PW-1:0] sel  [P];
  logic          ogo  [P];
  logic [P-1:0]  pop;

  // route computation for each input head
  always_comb
    for (int i = 0; i < P; i++) begin
      int unsigned r, rx, ry;
      r  = int'(q[i][qrp[i]].dest) / NCONC;
      rx = r % MESH_X;
      ry = r / MESH_X;
      if (rx > int'(my_x))      route[i] = PW'(1);
      else if (rx < int'(my_x)) route[i] = PW'(3);
      else if (ry > int'(my_y)) route[i] = PW'(2);
      else if (ry < int'(my_y)) route[i] = PW'(0);
      else                      route[i] = PW'(4 + int'(q[i][qrp[i]].dest) % NCONC);
    end

  // round-robin output arbitration
  always_comb begin
    pop = '0;
    for (int o = 0; o < P; o++) begin
      ogo[o] = 1'b0;
      sel[o] = '0;
      for (int k = 0; k < P; k++) begin
        int unsigned j;
        j = (int'(ptr[o]) + k) % P;
        if (!ogo[o] && qn[j] != 0 && route[j] == PW'(o)) begin
          ogo[o] = 1'b1;
          sel[o] = PW'(j);
        end
      end
      out_valid[o] = ogo[o];
      out_flit[o]  = q[sel[o]][qrp[sel[o]]];
      if (ogo[o] && out_ready[o]) pop[sel[o]] = 1'b1;
    end
  end

  always_comb
    for (int i = 0; i < P; i++) in_ready[i] = (qn[i] != 2'd2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < P; i++) begin
        qwp[i] <= 1'b0;
        qrp[i] <= 1'b0;
        qn[i]  <= '0;
        ptr[i] <= '0;
      end
    end else begin
      for (int i = 0; i < P; i++) begin
        logic push;
        push = in_valid[i] && in_ready[i];
        if (push) begin
          q[i][qwp[i]] <= in_flit[i];
          qwp[i] <= ~qwp[i];
        end
        if (pop[i]) qrp[i] <= ~qrp[i];
        qn[i] <= qn[i] + 2'(push) - 2'(pop[i]);
      end
      for (int o = 0; o < P; o++)
        if (ogo[o] && out_ready[o]) ptr[o] <= (sel[o] == PW'(P - 1)) ? '0 : sel[o] + 1'b1;
    end
  end
endmodule
