// puma_noc: the node's on-chip network: MESH_X x MESH_Y routers (puma_router)
// in a 2-D mesh, each serving CONC tiles. Tile t attaches to local port
// t % CONC of router t / CONC; router r sits at column r % MESH_X, row
// r / MESH_X. Local ports beyond NTILES and mesh ports at the edge are tied
// off (never valid, always ready... never used by XY routing).
// Flits are valid/ready handshaked on every link; a link transfers one
// flit per cycle. The default 7 x 5 mesh of 35 routers serves 140 >= 138
// tiles with concentration 4.
// Published: flit size 32, 4 ports, concentration 4, 138 tiles. Own choices:
// the mesh and its 7 x 5 shape.
module puma_noc
  import puma_pkg::*;
#(
  parameter int unsigned NTILES = TILES_PER_NODE,
  parameter int unsigned MESH_X = 7,
  parameter int unsigned MESH_Y = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   t_in_valid  [NTILES],   // tile -> network
  input  flit_t  t_in_flit   [NTILES],
  output logic   t_in_ready  [NTILES],
  output logic   t_out_valid [NTILES],   // network -> tile
  output flit_t  t_out_flit  [NTILES],
  input  logic   t_out_ready [NTILES]
);
  localparam int unsigned NR = MESH_X * MESH_Y;
  localparam int unsigned P  = 4 + CONC;

  logic  iv [NR][P];
  flit_t ifl[NR][P];
  logic  ir [NR][P];
  logic  ov [NR][P];
  flit_t ofl[NR][P];
  logic  orr[NR][P];

  for (genvar r = 0; r < NR; r++) begin : g_r
    localparam int unsigned X = r % MESH_X;
    localparam int unsigned Y = r / MESH_X;
    puma_router #(.MESH_X(MESH_X), .NCONC(CONC)) u_router (
      .clk(clk), .rst_n(rst_n), .my_x(8'(X)), .my_y(8'(Y)),
      .in_valid(iv[r]), .in_flit(ifl[r]), .in_ready(ir[r]),
      .out_valid(ov[r]), .out_flit(ofl[r]), .out_ready(orr[r])
    );
    // mesh links: my input from the neighbour's opposite output
    for (genvar d = 0; d < 4; d++) begin : g_dir
      localparam int NX = (d == 1) ? int'(X) + 1 : (d == 3) ? int'(X) - 1 : int'(X);
      localparam int NY = (d == 2) ? int'(Y) + 1 : (d == 0) ? int'(Y) - 1 : int'(Y);
      localparam int OPP = (d + 2) % 4;
      if (NX >= 0 && NX < int'(MESH_X) && NY >= 0 && NY < int'(MESH_Y)) begin : g_link
        localparam int NB = NY * int'(MESH_X) + NX;
        assign iv[r][d]  = ov[NB][OPP];
        assign ifl[r][d] = ofl[NB][OPP];
        assign orr[r][d] = ir[NB][OPP];
      end else begin : g_edge
        assign iv[r][d]  = 1'b0;
        assign ifl[r][d] = '0;
        assign orr[r][d] = 1'b1;
      end
    end
    for (genvar c = 0; c < CONC; c++) begin : g_loc
      localparam int unsigned T = r * CONC + c;
      if (T < NTILES) begin : g_t
        assign iv[r][4+c]  = t_in_valid[T];
        assign ifl[r][4+c] = t_in_flit[T];
        assign t_in_ready[T]  = ir[r][4+c];
        assign t_out_valid[T] = ov[r][4+c];
        assign t_out_flit[T]  = ofl[r][4+c];
        assign orr[r][4+c] = t_out_ready[T];
      end else begin : g_none
        assign iv[r][4+c]  = 1'b0;
        assign ifl[r][4+c] = '0;
        assign orr[r][4+c] = 1'b1;
      end
    end
  end
endmodule
