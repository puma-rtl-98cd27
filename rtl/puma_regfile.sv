// puma_regfile: the core's general-purpose register file, built as a
// ROM-Embedded RAM. The same array serves as 512 x 16-bit read/write registers
// and holds a read-only look-up table of the same size for transcendental
// functions (sigmoid, tanh, log, exp: 128 entries each).
//
// How it works. Each cell of a ROM-Embedded RAM has its left access transistor
// tied to either word line 1 or word line 2; that wiring is the ROM bit
// (WL1 = 1, WL2 = 0). In RAM mode both word lines are raised and the array is
// an ordinary register file. A ROM read of row r overwrites that row, so it
// runs the sequence of the published ROM mode, one step per cycle:
//   ROM_BUF  copy row r into the row buffer
//   ROM_W1   write all ones with both word lines active
//   ROM_W0   write zeros with word line 1 off: only the cells wired to WL2
//            take the 0, so the row now holds the ROM word
//   ROM_RD   read the row (rom_valid/rom_data) and, at the end of the same
//            cycle, restore the buffered RAM contents
// A ROM look-up therefore takes 4 cycles after the request and leaves the RAM
// data unchanged. A register write presented in the ROM_RD cycle is applied
// after the restore, so a result may be written back in that cycle.
// The wiring pattern is loaded from rtl/puma_rom.hex, which holds, for row
// 128*f + i, the Q8.8 value of function f (0 sigmoid, 1 tanh, 2 log, 3 exp)
// at the centre of bin i: x = (i-64)/8 + 1/16 (for log, x = i/8 + 1/16).
//
// Ports: two asynchronous read ports (ra/rb), one synchronous write port
// (we/wa/wd) and the ROM port (rom_req with rom_row; rom_busy while the
// sequence runs; rom_valid with rom_data in the ROM_RD cycle).
// The 512-word size is 2 x (crossbar dimension) x (crossbars per core) as
// published; port count, the one-step-per-cycle ROM timing and the table
// layout are this design's choices.
module puma_regfile
  import puma_pkg::*;
#(
  parameter int unsigned WORDS = RF_WORDS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(WORDS)-1:0]  ra,
  output word_t                     rda,
  input  logic [$clog2(WORDS)-1:0]  rb,
  output word_t                     rdb,
  input  logic                      we,
  input  logic [$clog2(WORDS)-1:0]  wa,
  input  word_t                     wd,
  input  logic                      rom_req,
  input  logic [$clog2(WORDS)-1:0]  rom_row,
  output logic                      rom_busy,
  output logic                      rom_valid,
  output word_t                     rom_data
);
  localparam int unsigned AW = $clog2(WORDS);

  typedef enum logic [2:0] {ROM_IDLE, ROM_BUF, ROM_W1, ROM_W0, ROM_RD} rom_st_e;

  word_t   ram      [WORDS];
  word_t   rom_wire [WORDS];   // 1 = AXL on WL1, 0 = AXL on WL2
  word_t   rowbuf;
  logic [AW-1:0] row;
  rom_st_e st;

  initial $readmemh("rtl/puma_rom.hex", rom_wire);

  assign rda       = ram[ra];
  assign rdb       = ram[rb];
  assign rom_busy  = (st != ROM_IDLE);
  assign rom_valid = (st == ROM_RD);
  assign rom_data  = ram[row];

  always_ff @(posedge clk) begin
    unique case (st)
      ROM_BUF: rowbuf <= ram[row];
      ROM_W1:  ram[row] <= '1;
      ROM_W0:  ram[row] <= ram[row] & rom_wire[row];
      ROM_RD: begin
        ram[row] <= rowbuf;
        if (we) ram[wa] <= wd;
      end
      default: if (we) ram[wa] <= wd;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= ROM_IDLE;
      row <= '0;
    end else begin
      unique case (st)
        ROM_IDLE: if (rom_req) begin st <= ROM_BUF; row <= rom_row; end
        ROM_BUF:  st <= ROM_W1;
        ROM_W1:   st <= ROM_W0;
        ROM_W0:   st <= ROM_RD;
        default:  st <= ROM_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_no_write_during_rom: assert property (@(posedge clk) disable iff (!rst_n) rom_busy && !rom_valid |-> !we)
    else $error("register write during a ROM look-up");
`endif
endmodule
