// puma_tile: one PUMA tile: NCORES cores sharing a shared memory (data memory,
// attribute buffer, memory controller), a tile control unit with its own
// instruction memory for inter-tile send/receive, and a receive buffer of
// 16 two-entry FIFOs connected to the router.
//
// The cores and the tile control unit are the requesters of the shared
// memory's controller (ports 0..NCORES-1 = cores, port NCORES = control
// unit); they synchronise through its valid/count attributes. Words leaving
// the tile are flits on net_out_*, words arriving are flits on net_in_* that
// the receive buffer sorts into FIFOs by fifo-id.
//
// Interface: start (pulse) starts all cores and the control unit at pc 0;
// done is high when every core and the control unit have executed halt.
// cfg is the node's configuration port (acts when cfg.tile == tile_id);
// h_addr/h_rdata read the shared memory without touching its attributes.
// Published: 8 cores per tile, shared memory with attribute buffer, receive
// buffer, tile control unit and instruction memory. The host port and the
// start/done handshake are own choices.
//
// blk_rd/blk_wr of the shared memory and stall_c/kill_c of each core are not
// used by the tile's logic: they are observation points (blocked accesses,
// pipeline stalls and kills) that testbenches count, so unused-signal lint
// warnings on them stand. A tile program that sends more words to its own
// receive FIFO than the FIFO holds before receiving them deadlocks, as the
// control unit runs send and receive in order.
module puma_tile
  import puma_pkg::*;
#(
  parameter int unsigned NCORES = CORES_PER_TILE,
  parameter int unsigned SHWORDS = SHMEM_WORDS,
  parameter int unsigned DIM = XBAR_DIM
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [7:0]          tile_id,
  input  logic                start,
  output logic                done,
  input  host_cfg_t           cfg,
  input  logic [MADDR_W-1:0]  h_addr,
  output word_t               h_rdata,
  output logic                net_out_valid,
  output flit_t               net_out_flit,
  input  logic                net_out_ready,
  input  logic                net_in_valid,
  input  flit_t               net_in_flit,
  output logic                net_in_ready
);
  localparam int unsigned NP = NCORES + 1;
  localparam int unsigned TPCW = $clog2(TILE_IMEM_WORDS);
  localparam int unsigned CPCW = $clog2(CORE_IMEM_WORDS);

  logic               sel;
  assign sel = cfg.we && (cfg.tile == tile_id);

  logic [NP-1:0]      req, we, gnt;
  logic [MADDR_W-1:0] addr  [NP];
  word_t              wdata [NP];
  logic [COUNT_W-1:0] count [NP];
  word_t              rdata;
  logic               blk_rd, blk_wr;
  logic [NCORES-1:0]  halted;

  puma_shmem #(.WORDS(SHWORDS), .NPORT(NP)) u_shmem (
    .clk(clk), .rst_n(rst_n), .req(req), .we(we), .addr(addr), .wdata(wdata),
    .count(count), .gnt(gnt), .rdata(rdata), .blk_rd(blk_rd), .blk_wr(blk_wr),
    .h_we(sel && cfg.kind == H_SHMEM), .h_addr(sel ? cfg.addr : h_addr),
    .h_wdata(cfg.data[WORD_W-1:0]), .h_count(cfg.count), .h_rdata(h_rdata)
  );

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    logic stall_c, kill_c;
    puma_core #(.DIM(DIM)) u_core (
      .clk(clk), .rst_n(rst_n), .start(start), .halted(halted[c]),
      .im_we(sel && cfg.kind == H_CORE_IMEM && cfg.core == c),
      .im_waddr(cfg.addr[CPCW-1:0]), .im_wdata(instr_t'(cfg.data)),
      .w_we(sel && cfg.kind == H_WEIGHT && cfg.core == c), .w_mvmu(cfg.mvmu),
      .w_row(cfg.row[$clog2(DIM)-1:0]), .w_col(cfg.col[$clog2(DIM)-1:0]),
      .w_data(cfg.data[WORD_W-1:0]),
      .mem_req(req[c]), .mem_we(we[c]), .mem_addr(addr[c]), .mem_wdata(wdata[c]),
      .mem_count(count[c]), .mem_gnt(gnt[c]), .mem_rdata(rdata),
      .stall(stall_c), .kill(kill_c)
    );
  end

  // tile control unit, its instruction memory and the receive buffer
  logic [TPCW-1:0] tpc;
  instr_t          tinstr;
  logic            t_halted, rb_valid, rb_pop;
  logic [3:0]      rb_sel;
  word_t           rb_data;

  puma_imem #(.WORDS(TILE_IMEM_WORDS)) u_timem (
    .clk(clk), .we(sel && cfg.kind == H_TILE_IMEM), .waddr(cfg.addr[TPCW-1:0]),
    .wdata(instr_t'(cfg.data)), .raddr(tpc), .rdata(tinstr)
  );

  puma_tile_cu u_tcu (
    .clk(clk), .rst_n(rst_n), .start(start), .halted(t_halted),
    .pc(tpc), .instr(tinstr),
    .mem_req(req[NCORES]), .mem_we(we[NCORES]), .mem_addr(addr[NCORES]),
    .mem_wdata(wdata[NCORES]), .mem_count(count[NCORES]), .mem_gnt(gnt[NCORES]),
    .mem_rdata(rdata),
    .net_valid(net_out_valid), .net_flit(net_out_flit), .net_ready(net_out_ready),
    .rb_sel(rb_sel), .rb_valid(rb_valid), .rb_data(rb_data), .rb_pop(rb_pop)
  );

  puma_recv_buf u_rb (
    .clk(clk), .rst_n(rst_n), .in_valid(net_in_valid), .in_flit(net_in_flit),
    .in_ready(net_in_ready), .rd_sel(rb_sel), .rd_valid(rb_valid),
    .rd_data(rb_data), .rd_pop(rb_pop)
  );

  assign done = (&halted) && t_halted;
endmodule
