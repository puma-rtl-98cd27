// puma_vfu: vector functional unit, an array of LANES identical functional
// units (FU). Each FU computes one element of a vector ALU or ALUimm
// instruction in Q8.8 fixed point: add, subtract, multiply, divide, shift,
// and, or, invert, relu, min, max and random. The operand steer unit of the
// core feeds it LANES elements per cycle for vec-width elements in total
// (temporal SIMD), so a vector of n elements takes ceil(n/LANES) cycles.
// The transcendental operations (sigmoid, tanh, log, exp) are evaluated by a
// look-up in the register file's embedded ROM; for those the FU computes the
// ROM row (rom_row) from the operand.
//
// Purely combinational: y = f(op, a, b) in the same cycle.
// Arithmetic saturates to 16 bits. Shift: b >= 0 shifts left by b, b < 0
// shifts right arithmetically by -b. Division by zero saturates. The random
// operation returns the 16-bit word `rnd` supplied by the core.
// LANES = 1 follows the published configuration table (VFU width 1).
// The fixed-point format, saturation and the ROM index rule are own choices.
module puma_vfu
  import puma_pkg::*;
#(
  parameter int unsigned LANES = 1
) (
  input  aluop_e      op,
  input  word_t       a   [LANES],
  input  word_t       b   [LANES],
  input  word_t       rnd,
  output word_t       y   [LANES],
  output logic [8:0]  rom_row [LANES],
  output logic        is_rom
);
  assign is_rom = op inside {AOP_SIG, AOP_TANH, AOP_LOG, AOP_EXP};

  for (genvar l = 0; l < LANES; l++) begin : g_fu
    logic signed [15:0] sa, sb;
    logic signed [47:0] wa, wb, wy;
    logic signed [15:0] xi;     // clamped table index before offset
    assign sa = a[l];
    assign sb = b[l];
    assign wa = 48'(sa);
    assign wb = 48'(sb);

    always_comb begin
      wy = '0;
      unique case (op)
        AOP_ADD:  wy = wa + wb;
        AOP_SUB:  wy = wa - wb;
        AOP_MUL:  wy = (wa * wb) >>> FRAC_BITS;
        AOP_DIV:  wy = (sb == 0) ? ((sa < 0) ? -48'sd32768 : 48'sd32767)
                                 : (wa <<< FRAC_BITS) / wb;
        AOP_SHL:  wy = (sb < 0) ? (wa >>> (-sb)) : (wa <<< sb[4:0]);
        AOP_AND:  wy = 48'(signed'(sa & sb));
        AOP_OR:   wy = 48'(signed'(sa | sb));
        AOP_INV:  wy = 48'(signed'(~sa));
        AOP_RELU: wy = (sa < 0) ? '0 : wa;
        AOP_MIN:  wy = (sa < sb) ? wa : wb;
        AOP_MAX:  wy = (sa > sb) ? wa : wb;
        AOP_RND:  wy = 48'(signed'(rnd));
        default:  wy = wa;
      endcase
      if (op inside {AOP_AND, AOP_OR, AOP_INV, AOP_RND}) y[l] = wy[15:0];
      else                                               y[l] = sat16(wy);
    end

    // ROM row: bins of 1/8 (32 LSBs of Q8.8); 128 bins per function
    always_comb begin
      if (op == AOP_LOG) xi = sa >>> 5;          // x in [0,16)
      else               xi = (sa >>> 5) + 16'sd64; // x in [-8,8)
      if (xi < 0)         xi = 0;
      else if (xi > 127)  xi = 127;
      rom_row[l] = {op[1:0], xi[6:0]};
    end
  end
endmodule
