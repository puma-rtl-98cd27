// puma_tile_cu: tile control unit. Runs the tile's own program, held in the
// tile instruction memory, which moves data between tiles:
//   send  memaddr, fifo-id, target, vec-width: reads vec-width words from the
//         shared memory (consuming reads, blocked until valid) and sends each
//         as a flit to receive FIFO fifo-id of tile target;
//   recv  memaddr, fifo-id, count, vec-width: takes vec-width words from the
//         local receive FIFO fifo-id (waiting for each) and writes them to the
//         shared memory with the given consumer count (blocked until the
//         destination word is free);
//   halt  stops the unit.
// Instructions run one at a time in program order and block, as published.
// One word moves per step: send takes a memory grant then a network
// handshake; recv takes a FIFO word and a memory grant in the same cycle.
//
// Interface: start/halted; pc/instr to the tile instruction memory
// (asynchronous read); mem_* as in puma_shmem; net_* valid/ready towards the
// router; rb_* towards the receive buffer.
// The instruction set follows the published send/receive operands; the
// encoding (puma_pkg), halt, and the one-word-per-flit transfer are own choices.
module puma_tile_cu
  import puma_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = TILE_IMEM_WORDS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          halted,
  output logic [$clog2(IMEM_WORDS)-1:0] pc,
  input  instr_t                        instr,
  output logic                          mem_req,
  output logic                          mem_we,
  output logic [MADDR_W-1:0]            mem_addr,
  output word_t                         mem_wdata,
  output logic [COUNT_W-1:0]            mem_count,
  input  logic                          mem_gnt,
  input  word_t                         mem_rdata,
  output logic                          net_valid,
  output flit_t                         net_flit,
  input  logic                          net_ready,
  output logic [$clog2(NUM_FIFOS)-1:0]  rb_sel,
  input  logic                          rb_valid,
  input  word_t                         rb_data,
  output logic                          rb_pop
);
  typedef enum logic [2:0] {T_IDLE, T_DEC, T_RD, T_TX, T_RX} t_st_e;
  t_st_e           st;
  instr_t          cur;
  logic [VW_W-1:0] i, n;
  word_t           txd;

  assign rb_sel    = cur.src1[$clog2(NUM_FIFOS)-1:0];
  assign mem_addr  = cur.imm + MADDR_W'(i);
  assign mem_count = cur.dest[COUNT_W-1:0];
  assign mem_wdata = rb_data;
  assign mem_req   = (st == T_RD) || (st == T_RX && rb_valid);
  assign mem_we    = (st == T_RX);
  assign rb_pop    = (st == T_RX) && mem_gnt;
  assign net_valid = (st == T_TX);
  assign net_flit  = '{rsvd: '0, dest: cur.dest[7:0], fifo: cur.src1[3:0], data: txd};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= T_IDLE;
      pc     <= '0;
      halted <= 1'b0;
      cur    <= '0;
      i      <= '0;
      n      <= '0;
      txd    <= '0;
    end else if (start) begin
      st     <= T_DEC;
      pc     <= '0;
      halted <= 1'b0;
    end else begin
      unique case (st)
        T_DEC: begin
          cur <= instr;
          i   <= '0;
          n   <= (instr.vw == 0) ? VW_W'(1) : instr.vw;
          pc  <= pc + 1'b1;
          unique case (instr.op)
            OP_SEND: st <= T_RD;
            OP_RECV: st <= T_RX;
            OP_HALT: begin st <= T_IDLE; halted <= 1'b1; end
            default: st <= T_DEC;
          endcase
        end
        T_RD: if (mem_gnt) begin txd <= mem_rdata; st <= T_TX; end
        T_TX: if (net_ready) begin
          i  <= i + 1'b1;
          st <= (i == n - 1) ? T_DEC : T_RD;
        end
        T_RX: if (mem_gnt) begin
          i  <= i + 1'b1;
          if (i == n - 1) st <= T_DEC;
        end
        default: ;
      endcase
    end
  end
endmodule
