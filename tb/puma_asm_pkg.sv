// puma_asm_pkg: helper functions for testbenches that build PUMA core and
// tile instructions in the encoding of puma_pkg (a tiny assembler).
package puma_asm_pkg;
  import puma_pkg::*;

  function automatic instr_t mk(opcode_e op, logic [3:0] aop, int dest, int src1, int imm, int vw);
    instr_t i;
    i.op = op; i.aop = aop; i.dest = ADDR_W'(dest); i.src1 = ADDR_W'(src1);
    i.imm = 16'(imm); i.vw = VW_W'(vw);
    return i;
  endfunction
  function automatic instr_t i_alu(aluop_e a, int d, int s1, int s2, int vw);
    return mk(OP_ALU, a, d, s1, s2 << 6, vw);
  endfunction
  function automatic instr_t i_alui(aluop_e a, int d, int s1, int imm, int vw);
    return mk(OP_ALUI, a, d, s1, imm, vw);
  endfunction
  function automatic instr_t i_aluint(sop_e a, int d, int s1, int s2);
    return mk(OP_ALUINT, a, d, s1, s2 << 6, 0);
  endfunction
  function automatic instr_t i_set(int d, int imm);
    return mk(OP_SET, 0, d, 0, imm, 0);
  endfunction
  function automatic instr_t i_copy(int d, int s1, int vw);
    return mk(OP_COPY, 0, d, s1, 0, vw);
  endfunction
  function automatic instr_t i_load(int d, int maddr, int vw);
    return mk(OP_LOAD, 0, d, 0, maddr, vw);
  endfunction
  function automatic instr_t i_store(int maddr, int s1, int count, int vw);
    return mk(OP_STORE, 0, count, s1, maddr, vw);
  endfunction
  function automatic instr_t i_mvm(int mask, int filter, int stride);
    return mk(OP_MVM, 4'(mask), 0, filter, stride << 6, 0);
  endfunction
  function automatic instr_t i_jmp(int pc);
    return mk(OP_JMP, 0, 0, 0, 0, pc);
  endfunction
  function automatic instr_t i_brn(sop_e c, int s1, int s2, int pc);
    return mk(OP_BRN, c, 0, s1, s2 << 6, pc);
  endfunction
  function automatic instr_t i_halt();
    return mk(OP_HALT, 0, 0, 0, 0, 0);
  endfunction
  function automatic instr_t i_send(int maddr, int fifo, int target, int vw);
    return mk(OP_SEND, 0, target, fifo, maddr, vw);
  endfunction
  function automatic instr_t i_recv(int maddr, int fifo, int count, int vw);
    return mk(OP_RECV, 0, count, fifo, maddr, vw);
  endfunction

  // Q8.8 value of ROM table f at bin i (the formula behind rtl/puma_rom.hex)
  function automatic int rom_value(int row);
    int f, i; real x, v;
    f = row / 128; i = row % 128;
    x = (f == 2) ? i / 8.0 + 1.0 / 16 : (i - 64) / 8.0 + 1.0 / 16;
    case (f)
      0: v = 1.0 / (1.0 + $exp(-x));
      1: v = ($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x));
      2: v = $ln(x);
      default: v = $exp(x);
    endcase
    if (v > 127.996) v = 127.996;
    return int'($rtoi(v * 256.0 + ((v < 0) ? -0.5 : 0.5)));
  endfunction

  // ROM row used for operand x (Q8.8) by transcendental op f (0..3)
  function automatic int rom_row(int f, int x);
    int ri;
    ri = (f == 2) ? (x >>> 5) : (x >>> 5) + 64;
    ri = (ri < 0) ? 0 : (ri > 127) ? 127 : ri;
    return 128 * f + ri;
  endfunction

  function automatic int sat16i(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction
endpackage
