// puma_core: one PUMA core: an in-order fetch / decode / execute pipeline that
// drives two matrix-vector multiplication units (MVMU), a vector functional
// unit (VFU), a scalar functional unit (SFU), a register file that doubles as
// a function look-up ROM, and a memory unit (MU) towards the tile's shared
// memory.
//
// How it works.
//  * Fetch reads the instruction at pc from the core instruction memory,
//    decode registers it, execute runs it. The control unit stalls fetch and
//    decode while execute is busy or a hazard holds, and kills the two younger
//    instructions when a jmp or a taken brn redirects the pc (resolved in the
//    first execute cycle by the SFU).
//  * Registers form one address space: 0-511 general-purpose registers,
//    512-767 XbarIn (128 per MVMU), 768-1023 XbarOut. XbarOut is read-only to
//    the program; an MVM writes it.
//  * Vector instructions (alu, alui, copy, load, store) run under temporal
//    SIMD: the operand steer unit holds the instruction and walks its
//    vec-width elements, one per cycle through the one-lane VFU. A
//    transcendental alu op (sigmoid, tanh, log, exp) looks each element up in
//    the register file's embedded ROM (4 cycles per element). load/store move
//    one 16-bit word per granted shared-memory access and wait while the
//    memory controller blocks them (valid/count attributes).
//  * mvm starts every MVMU selected by its mask (MVM coalescing) and retires;
//    the MVMUs work in the background. A later instruction that touches the
//    XbarIn/XbarOut of a busy MVMU, an mvm to a busy MVMU, and halt wait for it.
//
// Interface
//   start            begin execution at pc 0 (pulse); halted once halt retires
//   im_*             instruction memory writes (configuration)
//   w_*              crossbar weight writes (configuration), w_mvmu selects
//   mem_*            MU request: req/we/addr/wdata/count out; gnt in, the
//                    access happened this cycle; rdata valid with gnt
//   stall, kill      control-unit events, for observation
//
// Follows the published core: three-stage in-order pipeline, instruction set
// (mvm, alu, alui, alu-int, set, copy, load, store, jmp, brn), temporal SIMD,
// mask-coalesced MVMs, ROM-embedded RAM register file. Own choices: the
// instruction encoding (see puma_pkg), the address map, the halt instruction,
// the scoreboard on busy MVMUs, one memory word per access, and src3 and the
// ld/st-width operands, which are not implemented.
module puma_core
  import puma_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = CORE_IMEM_WORDS,
  parameter int unsigned NMVMU      = NUM_MVMU,
  parameter int unsigned DIM        = XBAR_DIM
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          halted,
  input  logic                          im_we,
  input  logic [$clog2(IMEM_WORDS)-1:0] im_waddr,
  input  instr_t                        im_wdata,
  input  logic                          w_we,
  input  logic [$clog2(NMVMU)-1:0]      w_mvmu,
  input  logic [$clog2(DIM)-1:0]        w_row,
  input  logic [$clog2(DIM)-1:0]        w_col,
  input  word_t                         w_data,
  output logic                          mem_req,
  output logic                          mem_we,
  output logic [MADDR_W-1:0]            mem_addr,
  output word_t                         mem_wdata,
  output logic [COUNT_W-1:0]            mem_count,
  input  logic                          mem_gnt,
  input  word_t                         mem_rdata,
  output logic                          stall,
  output logic                          kill
);
  localparam int unsigned PCW   = $clog2(IMEM_WORDS);
  localparam int unsigned LD    = $clog2(DIM);
  localparam int unsigned RFW   = 2 * DIM * NMVMU;
  localparam int unsigned XINB  = RFW;
  localparam int unsigned XOUTB = RFW + DIM * NMVMU;

  // ------------------------------------------------------------ fetch
  logic [PCW-1:0] pc;
  logic           running;
  instr_t         im_rdata;
  logic           f_valid, d_valid;
  instr_t         f_instr, d_instr;

  puma_imem #(.WORDS(IMEM_WORDS)) u_imem (
    .clk(clk), .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
    .raddr(pc), .rdata(im_rdata)
  );

  // ------------------------------------------------------------ units
  word_t xin  [NMVMU][DIM];
  word_t xout [NMVMU][DIM];
  logic [NMVMU-1:0] mv_busy, mv_start, mv_xwe;
  logic [ADDR_W-1:0] mv_filter, mv_stride;
  logic [LD-1:0]     mv_xaddr;
  word_t             mv_xdata;

  for (genvar m = 0; m < NMVMU; m++) begin : g_mvmu
    logic done_unused;
    puma_mvmu #(.DIM(DIM)) u_mvmu (
      .clk(clk), .rst_n(rst_n),
      .xin_we(mv_xwe[m]), .xin_addr(mv_xaddr), .xin_wdata(mv_xdata),
      .xin(xin[m]), .xout(xout[m]),
      .start(mv_start[m]), .filter(mv_filter), .stride(mv_stride),
      .busy(mv_busy[m]), .done(done_unused),
      .w_we(w_we && (w_mvmu == m)), .w_row(w_row), .w_col(w_col), .w_data(w_data)
    );
  end

  logic [ADDR_W-1:0] ra, rb, wa;
  word_t             rf_a, rf_b, opa, opb, wd;
  logic              wen;
  logic              rom_req, rom_busy, rom_valid;
  logic [8:0]        rom_row_v [1];
  word_t             rom_data;
  logic              vfu_is_rom;
  word_t             vfu_a [1], vfu_b [1], vfu_y [1];
  word_t             sfu_y;
  logic              sfu_cond;
  logic [15:0]       lfsr;

  puma_regfile #(.WORDS(RFW)) u_rf (
    .clk(clk), .rst_n(rst_n),
    .ra(ra[$clog2(RFW)-1:0]), .rda(rf_a), .rb(rb[$clog2(RFW)-1:0]), .rdb(rf_b),
    .we(wen && (wa < ADDR_W'(RFW))), .wa(wa[$clog2(RFW)-1:0]), .wd(wd),
    .rom_req(rom_req), .rom_row(rom_row_v[0][$clog2(RFW)-1:0]),
    .rom_busy(rom_busy), .rom_valid(rom_valid), .rom_data(rom_data)
  );

  // read of the unified register space
  function automatic word_t rd(input logic [ADDR_W-1:0] addr, input word_t rfv);
    if (addr < ADDR_W'(XINB))       return rfv;
    else if (addr < ADDR_W'(XOUTB)) return xin[(addr - ADDR_W'(XINB)) / DIM][(addr - ADDR_W'(XINB)) % DIM];
    else                            return xout[(addr - ADDR_W'(XOUTB)) / DIM][(addr - ADDR_W'(XOUTB)) % DIM];
  endfunction

  // MVMUs whose XbarIn/XbarOut hold the address
  function automatic logic [NMVMU-1:0] region(input logic [ADDR_W-1:0] addr);
    region = '0;
    if (addr >= ADDR_W'(XINB) && addr < ADDR_W'(XOUTB)) region[(addr - ADDR_W'(XINB)) / DIM] = 1'b1;
    else if (addr >= ADDR_W'(XOUTB))                    region[(addr - ADDR_W'(XOUTB)) / DIM] = 1'b1;
  endfunction

  // ------------------------------------------------------------ execute
  typedef enum logic [1:0] {EX_IDLE, EX_RUN} ex_st_e;
  ex_st_e            ex_st;
  instr_t            e;
  logic [VW_W-1:0]   ei, en;       // element index, element count
  logic              last_el;

  instr_t            dd;
  logic [VW_W-1:0]   d_n;
  logic [NMVMU-1:0]  d_touch, d_mask;
  logic              hazard, accept, taken;
  logic [PCW-1:0]    target;

  assign dd  = d_instr;
  assign d_n = (dd.vw == 0) ? VW_W'(1) : dd.vw;

  always_comb begin
    d_touch = '0;
    d_mask  = dd.aop[NMVMU-1:0];
    unique case (dd.op)
      OP_ALU, OP_ALUI, OP_COPY, OP_LOAD, OP_STORE: begin
        d_touch = region(dd.dest) | region(dd.dest + ADDR_W'(d_n - 1))
                | region(dd.src1) | region(dd.src1 + ADDR_W'(d_n - 1));
        if (dd.op == OP_ALU)
          d_touch |= region(src2_of(dd)) | region(src2_of(dd) + ADDR_W'(d_n - 1));
        if (dd.op inside {OP_LOAD})  d_touch = region(dd.dest) | region(dd.dest + ADDR_W'(d_n - 1));
        if (dd.op inside {OP_STORE}) d_touch = region(dd.src1) | region(dd.src1 + ADDR_W'(d_n - 1));
      end
      OP_SET:         d_touch = region(dd.dest);
      OP_ALUINT, OP_BRN: d_touch = region(dd.dest) | region(dd.src1) | region(src2_of(dd));
      default: ;
    endcase
    unique case (dd.op)
      OP_MVM:  hazard = |(d_mask & mv_busy);
      OP_HALT: hazard = |mv_busy;
      default: hazard = |(d_touch & mv_busy);
    endcase
  end

  assign accept = d_valid && (ex_st == EX_IDLE) && !hazard;
  assign stall  = d_valid && !accept;

  // register-port addresses: from decode when idle, from the element walk when busy
  always_comb begin
    if (ex_st == EX_IDLE) begin
      ra = dd.src1;
      rb = (dd.op == OP_ALUINT || dd.op == OP_BRN) ? src2_of(dd) : dd.dest;
    end else begin
      ra = e.src1 + ADDR_W'(ei);
      rb = src2_of(e) + ADDR_W'(ei);
    end
    opa = rd(ra, rf_a);
    opb = rd(rb, rf_b);
  end

  puma_sfu u_sfu (.op(sop_e'(dd.aop)), .a(opa), .b(opb), .y(sfu_y), .cond(sfu_cond));

  assign vfu_a[0] = opa;
  assign vfu_b[0] = (e.op == OP_ALUI) ? e.imm : opb;
  puma_vfu #(.LANES(1)) u_vfu (
    .op(aluop_e'(e.aop)), .a(vfu_a), .b(vfu_b), .rnd(lfsr),
    .y(vfu_y), .rom_row(rom_row_v), .is_rom(vfu_is_rom)
  );

  assign taken  = accept && ((dd.op == OP_JMP) || (dd.op == OP_BRN && sfu_cond));
  assign target = dd.vw[PCW-1:0];
  assign kill   = taken;
  assign last_el = (ei == en - 1);

  // element step and write-back
  logic step;
  always_comb begin
    wen       = 1'b0;
    wa        = e.dest + ADDR_W'(ei);
    wd        = vfu_y[0];
    step      = 1'b0;
    rom_req   = 1'b0;
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = e.imm + MADDR_W'(ei);
    mem_wdata = opa;
    mem_count = e.dest[COUNT_W-1:0];
    mv_start  = '0;
    mv_filter = dd.src1;
    mv_stride = src2_of(dd);
    if (ex_st == EX_IDLE) begin
      if (accept) unique case (dd.op)
        OP_SET:    begin wen = 1'b1; wa = dd.dest; wd = dd.imm; end
        OP_ALUINT: begin wen = 1'b1; wa = dd.dest; wd = sfu_y; end
        OP_MVM:    mv_start = d_mask;
        default: ;
      endcase
    end else begin
      unique case (e.op)
        OP_ALU, OP_ALUI: begin
          if (vfu_is_rom) begin
            rom_req = !rom_busy;
            wd      = rom_data;
            wen     = rom_valid;
            step    = rom_valid;
          end else begin
            wen  = 1'b1;
            step = 1'b1;
          end
        end
        OP_COPY:  begin wen = 1'b1; wd = opa; step = 1'b1; end
        OP_LOAD:  begin mem_req = 1'b1; wen = mem_gnt; wd = mem_rdata; step = mem_gnt; end
        OP_STORE: begin mem_req = 1'b1; mem_we = 1'b1; step = mem_gnt; end
        default:  step = 1'b1;
      endcase
    end
  end

  // writes to XbarIn
  always_comb begin
    mv_xwe   = '0;
    mv_xaddr = LD'((wa - ADDR_W'(XINB)) % DIM);
    mv_xdata = wd;
    if (wen && wa >= ADDR_W'(XINB) && wa < ADDR_W'(XOUTB))
      mv_xwe[(wa - ADDR_W'(XINB)) / DIM] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc      <= '0;
      running <= 1'b0;
      halted  <= 1'b0;
      f_valid <= 1'b0;
      d_valid <= 1'b0;
      f_instr <= '0;
      d_instr <= '0;
      ex_st   <= EX_IDLE;
      e       <= '0;
      ei      <= '0;
      en      <= '0;
      lfsr    <= 16'hACE1;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (start) begin
        pc      <= '0;
        running <= 1'b1;
        halted  <= 1'b0;
        f_valid <= 1'b0;
        d_valid <= 1'b0;
      end else if (taken) begin
        pc      <= target;
        f_valid <= 1'b0;
        d_valid <= 1'b0;
      end else if (accept && dd.op == OP_HALT) begin
        running <= 1'b0;
        halted  <= 1'b1;
        f_valid <= 1'b0;
        d_valid <= 1'b0;
      end else if (!stall) begin
        d_valid <= f_valid;
        d_instr <= f_instr;
        f_valid <= running;
        f_instr <= im_rdata;
        if (running) pc <= pc + 1'b1;
      end

      // execute
      if (ex_st == EX_IDLE) begin
        if (accept && dd.op inside {OP_ALU, OP_ALUI, OP_COPY, OP_LOAD, OP_STORE}) begin
          ex_st <= EX_RUN;
          e     <= dd;
          ei    <= '0;
          en    <= d_n;
        end
      end else if (step) begin
        ei <= ei + 1'b1;
        if (last_el) ex_st <= EX_IDLE;
      end
    end
  end

`ifndef SYNTHESIS
  a_no_xbarout_write: assert property (@(posedge clk) disable iff (!rst_n) !(wen && wa >= ADDR_W'(XOUTB)))
    else $error("program wrote an XbarOut register");
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n) mem_req && !mem_gnt |=> mem_req)
    else $error("memory request dropped before grant");
`endif
endmodule
