// puma_imem: instruction memory of a core (4 KB) or of a tile (8 KB),
// holding 7-byte (56-bit) instructions. It is written word by word at
// configuration time through the load port and read asynchronously by the
// fetch stage: rdata is imem[raddr] in the same cycle.
// Capacity in instructions is floor(bytes/7): 585 for a core, 1170 for a tile.
// The memory technology is not modelled; this is a register array.
module puma_imem
  import puma_pkg::*;
#(
  parameter int unsigned WORDS = CORE_IMEM_WORDS
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(WORDS)-1:0]  waddr,
  input  instr_t                    wdata,
  input  logic [$clog2(WORDS)-1:0]  raddr,
  output instr_t                    rdata
);
  instr_t mem [WORDS];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
