// puma_shmem: a tile's shared memory: data memory, attribute buffer and the
// memory controller that arbitrates the cores and the tile control unit.
//
// Every 16-bit data word has two attributes, valid and count, that make the
// memory a producer/consumer synchronisation point between cores and tiles:
//   * a read of an invalid word is blocked (the reader waits);
//   * a read of a valid word returns the data and decrements count; the read
//     that brings count from 1 to 0 leaves the word invalid;
//   * a write to an invalid word stores the data, sets valid and sets count to
//     the number of reads the producer expects;
//   * a write to a valid word is blocked until the word has been consumed.
// A write with count 0 makes the word valid for any number of reads (for
// constants); it stays valid until overwritten by the host port.
//
// The controller serves one access per cycle. Requesters whose access is
// allowed by the attributes compete round-robin; the winner gets gnt in the
// same cycle, and a read returns rdata in that cycle. A request must be held
// until granted. blk_rd/blk_wr report that some request was blocked by the
// attributes in this cycle.
// The host port (h_*) loads inputs and reads results at configuration time:
// its writes take priority over all requesters and set valid and count; its
// reads (h_addr/h_rdata, combinational) leave the attributes unchanged.
//
// Published: 64 KB data memory (32K words), 32K-entry attribute buffer, the
// valid/count protocol. Own choices: count width (8 bits), count 0 meaning
// persistent, one word per cycle (the published bus is 384 bits wide),
// round-robin arbitration, the host port.
module puma_shmem
  import puma_pkg::*;
#(
  parameter int unsigned WORDS = SHMEM_WORDS,
  parameter int unsigned NPORT = CORES_PER_TILE + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NPORT-1:0]          req,
  input  logic [NPORT-1:0]          we,
  input  logic [MADDR_W-1:0]        addr  [NPORT],
  input  word_t                     wdata [NPORT],
  input  logic [COUNT_W-1:0]        count [NPORT],
  output logic [NPORT-1:0]          gnt,
  output word_t                     rdata,
  output logic                      blk_rd,
  output logic                      blk_wr,
  input  logic                      h_we,
  input  logic [MADDR_W-1:0]        h_addr,
  input  word_t                     h_wdata,
  input  logic [COUNT_W-1:0]        h_count,
  output word_t                     h_rdata
);
  localparam int unsigned AW = $clog2(WORDS);
  localparam int unsigned PW = (NPORT > 1) ? $clog2(NPORT) : 1;

  word_t              data  [WORDS];
  logic               valid [WORDS];
  logic [COUNT_W-1:0] cnt   [WORDS];

  logic [PW-1:0]      ptr, win;
  logic               any;
  logic [NPORT-1:0]   ok;
  logic [AW-1:0]      wa;

  always_comb begin
    blk_rd = 1'b0;
    blk_wr = 1'b0;
    for (int i = 0; i < NPORT; i++) begin
      ok[i] = req[i] && (we[i] ? !valid[addr[i][AW-1:0]] : valid[addr[i][AW-1:0]]);
      if (req[i] && !ok[i]) begin
        if (we[i]) blk_wr = 1'b1;
        else       blk_rd = 1'b1;
      end
    end
    any = 1'b0;
    win = '0;
    for (int k = 0; k < NPORT; k++) begin
      int unsigned j;
      j = (int'(ptr) + k) % NPORT;
      if (!any && ok[j]) begin
        any = 1'b1;
        win = PW'(j);
      end
    end
    if (h_we) any = 1'b0;
    gnt = '0;
    if (any) gnt[win] = 1'b1;
    wa      = addr[win][AW-1:0];
    rdata   = data[wa];
    h_rdata = data[h_addr[AW-1:0]];
  end

  always_ff @(posedge clk)
    if (h_we)               data[h_addr[AW-1:0]] <= h_wdata;
    else if (any && we[win]) data[wa] <= wdata[win];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
      for (int i = 0; i < WORDS; i++) begin
        valid[i] <= 1'b0;
        cnt[i]   <= '0;
      end
    end else if (h_we) begin
      valid[h_addr[AW-1:0]] <= 1'b1;
      cnt[h_addr[AW-1:0]]   <= h_count;
    end else if (any) begin
      ptr <= (win == PW'(NPORT - 1)) ? '0 : win + 1'b1;
      if (we[win]) begin
        valid[wa] <= 1'b1;
        cnt[wa]   <= count[win];
      end else if (cnt[wa] == COUNT_W'(1)) begin
        valid[wa] <= 1'b0;
        cnt[wa]   <= '0;
      end else if (cnt[wa] != '0) begin
        cnt[wa]   <= cnt[wa] - 1'b1;
      end
    end
  end

`ifndef SYNTHESIS
  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt))
    else $error("more than one grant");
`endif
endmodule
