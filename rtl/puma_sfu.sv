// puma_sfu: scalar functional unit. Executes the scalar integer ALUint
// instructions (add, subtract; compare equal, greater than, not equal) and
// evaluates the condition of the conditional branch (brn), which uses the
// same compare operations. Operands are 16-bit two's complement integers
// taken from the register file; compares return 1 or 0.
// Combinational: y and cond are valid in the cycle a, b and op are.
// The operations follow the published ISA; the encoding and the integer
// (not fixed-point) interpretation are own choices.
module puma_sfu
  import puma_pkg::*;
(
  input  sop_e   op,
  input  word_t  a,
  input  word_t  b,
  output word_t  y,
  output logic   cond
);
  always_comb begin
    unique case (op)
      SOP_EQ:  cond = (a == b);
      SOP_GT:  cond = ($signed(a) > $signed(b));
      SOP_NE:  cond = (a != b);
      default: cond = 1'b0;
    endcase
    unique case (op)
      SOP_ADD: y = a + b;
      SOP_SUB: y = a - b;
      default: y = {15'd0, cond};
    endcase
  end
endmodule
