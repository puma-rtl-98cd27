// puma_node: a PUMA node, the top of the design: NTILES tiles (138 in the
// published configuration, 1104 cores, 2208 MVMUs) connected by the on-chip
// mesh network.
//
// Use. At configuration time the host writes, through cfg, each core's
// program, each tile's send/receive program, the crossbar weights and the
// input data in the tiles' shared memories (see puma_pkg::host_cfg_t). A
// start pulse then starts every core and every tile control unit at pc 0.
// Cores of a tile exchange data through the shared memory (load/store with
// valid/count synchronisation); tiles exchange data through send/receive
// over the network. done rises when every unit of every tile has halted;
// results are read from a shared memory with rd_tile/rd_addr -> rd_data.
//
// Not included: the chip-to-chip (HyperTransport) link that would join
// nodes; its physical layer and protocol are not part of this design.
module puma_node
  import puma_pkg::*;
#(
  parameter int unsigned NTILES  = TILES_PER_NODE,
  parameter int unsigned MESH_X  = 7,
  parameter int unsigned MESH_Y  = 5,
  parameter int unsigned NCORES  = CORES_PER_TILE,
  parameter int unsigned SHWORDS = SHMEM_WORDS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  host_cfg_t          cfg,
  input  logic               start,
  output logic               done,
  input  logic [7:0]         rd_tile,
  input  logic [MADDR_W-1:0] rd_addr,
  output word_t              rd_data
);
  logic  ti_v [NTILES];
  flit_t ti_f [NTILES];
  logic  ti_r [NTILES];
  logic  to_v [NTILES];
  flit_t to_f [NTILES];
  logic  to_r [NTILES];
  word_t hrd  [NTILES];
  logic [NTILES-1:0] tdone;

  for (genvar t = 0; t < NTILES; t++) begin : g_tile
    puma_tile #(.NCORES(NCORES), .SHWORDS(SHWORDS)) u_tile (
      .clk(clk), .rst_n(rst_n), .tile_id(8'(t)), .start(start), .done(tdone[t]),
      .cfg(cfg), .h_addr(rd_addr), .h_rdata(hrd[t]),
      .net_out_valid(ti_v[t]), .net_out_flit(ti_f[t]), .net_out_ready(ti_r[t]),
      .net_in_valid(to_v[t]), .net_in_flit(to_f[t]), .net_in_ready(to_r[t])
    );
  end

  puma_noc #(.NTILES(NTILES), .MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_noc (
    .clk(clk), .rst_n(rst_n),
    .t_in_valid(ti_v), .t_in_flit(ti_f), .t_in_ready(ti_r),
    .t_out_valid(to_v), .t_out_flit(to_f), .t_out_ready(to_r)
  );

  assign done    = &tdone;
  assign rd_data = hrd[rd_tile];
endmodule
