// puma_recv_buf: a tile's receive buffer: NF FIFOs of DEPTH words each.
// A flit arriving from the router is steered by the write multiplexer into
// the FIFO named by its fifo-id field; the read multiplexer presents the head
// of the FIFO selected by the tile control unit (rd_sel) to the receive
// instruction being executed. FIFOs keep the words of one sender in order and
// let several senders deliver at once, independently of the order of the
// receive instructions.
//
// Timing: in_ready is high when the addressed FIFO has room (it depends on
// the flit's fifo-id only, not on any downstream signal); a word written in
// one cycle can be read in the next. rd_valid/rd_data show the selected head;
// rd_pop removes it at the clock edge.
// Published: 16 FIFOs of depth 2, write and read multiplexers. Own choice:
// entries are single 16-bit words with the routing header dropped.
module puma_recv_buf
  import puma_pkg::*;
#(
  parameter int unsigned NF    = NUM_FIFOS,
  parameter int unsigned DEPTH = FIFO_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  flit_t                 in_flit,
  output logic                  in_ready,
  input  logic [$clog2(NF)-1:0] rd_sel,
  output logic                  rd_valid,
  output word_t                 rd_data,
  input  logic                  rd_pop
);
  localparam int unsigned DW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t         mem  [NF][DEPTH];
  logic [DW-1:0] wp   [NF];
  logic [DW-1:0] rp   [NF];
  logic [DW:0]   fill [NF];
  logic [$clog2(NF)-1:0] wsel;

  assign wsel     = in_flit.fifo[$clog2(NF)-1:0];
  assign in_ready = (fill[wsel] != (DW+1)'(DEPTH));
  assign rd_valid = (fill[rd_sel] != '0);
  assign rd_data  = mem[rd_sel][rp[rd_sel]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < NF; f++) begin
        wp[f]   <= '0;
        rp[f]   <= '0;
        fill[f] <= '0;
      end
    end else begin
      for (int f = 0; f < NF; f++) begin
        logic push, pop;
        push = in_valid && in_ready && (wsel == f);
        pop  = rd_pop && rd_valid && (rd_sel == f);
        if (push) begin
          mem[f][wp[f]] <= in_flit.data;
          wp[f] <= (wp[f] == DW'(DEPTH - 1)) ? '0 : wp[f] + 1'b1;
        end
        if (pop) rp[f] <= (rp[f] == DW'(DEPTH - 1)) ? '0 : rp[f] + 1'b1;
        fill[f] <= fill[f] + (DW+1)'(push) - (DW+1)'(pop);
      end
    end
  end
endmodule
