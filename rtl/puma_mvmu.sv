// puma_mvmu: matrix-vector multiplication unit. One MVM instruction computes
// y = W^T x for a 128x128 matrix of signed 16-bit weights and a 128-word
// input vector, and writes the 128 results to the XbarOut registers.
//
// How it works. A 16-bit weight is bit-sliced over eight 2-bit crossbars
// (slice k holds bits 2k+1:2k), which share the XbarIn registers and the DAC
// array. Weights are stored in offset binary (w + 2^15) because conductances
// cannot be negative; the offset is removed digitally by subtracting
// 2^15 times the number of driven rows. Inputs are applied bit-serially,
// bit 0 first, through 1-bit DACs; bit 15 carries weight -2^15 (two's
// complement). For each input bit the ADC of every slice steps over the 128
// columns, one per cycle, and a shift-and-add unit folds the eight slice
// values into a 40-bit accumulator per column. After the last bit the
// accumulators are scaled back to Q8.8, saturated to 16 bits and copied into
// XbarOut. Input shuffling: DAC row r is fed from XbarIn[(r + filter*stride)
// mod 128], so a sliding window can be re-aligned without moving data.
//
// Interface
//   xin_we/xin_addr/xin_wdata  writes to XbarIn by the core (non-MVM instr.)
//   xin, xout                  register contents, read by the core
//   start, filter, stride      start an MVM (only while !busy)
//   busy                       high from the cycle after start until done
//   done                       one-cycle pulse when XbarOut has been written
//   w_we/w_row/w_col/w_data    serial weight writes at configuration time
// Timing: an MVM occupies the unit for 16*128 + 1 = 2049 cycles.
//
// Follows the published design: crossbars, DAC/ADC, XbarIn/XbarOut, 8 x 2-bit
// bit slicing, ADC reuse across columns, shift-and-add, filter/stride
// shuffling. Own choices: 1-bit DACs, offset-binary weights, the shuffle rule,
// a lossless ADC and Q8.8 scaling. The published MVM latency is 2304 ns
// at 1 GHz; this unit takes 2049 cycles.
module puma_mvmu
  import puma_pkg::*;
#(
  parameter int unsigned DIM    = XBAR_DIM,
  parameter int unsigned SLICES = NUM_SLICES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    xin_we,
  input  logic [$clog2(DIM)-1:0]  xin_addr,
  input  word_t                   xin_wdata,
  output word_t                   xin  [DIM],
  output word_t                   xout [DIM],
  input  logic                    start,
  input  logic [ADDR_W-1:0]       filter,
  input  logic [ADDR_W-1:0]       stride,
  output logic                    busy,
  output logic                    done,
  input  logic                    w_we,
  input  logic [$clog2(DIM)-1:0]  w_row,
  input  logic [$clog2(DIM)-1:0]  w_col,
  input  word_t                   w_data
);
  localparam int unsigned LD    = $clog2(DIM);
  localparam int unsigned ADC_W = $clog2(DIM * 3 + 1);

  logic [LD-1:0]      col, off;
  logic [3:0]         bitn;
  logic               last;
  logic signed [39:0] acc [DIM];
  logic [DIM-1:0]     dac_bits;
  logic [ADC_W-1:0]   adc [SLICES];
  word_t              w_off;
  logic [LD:0]        pop;

  assign w_off = w_data ^ 16'h8000;   // offset binary: w + 2^15

  // DAC array input: one bit of each (shuffled) XbarIn register
  always_comb
    for (int r = 0; r < DIM; r++)
      dac_bits[r] = xin[LD'(r + int'(off))][bitn];

  always_comb begin
    pop = '0;
    for (int r = 0; r < DIM; r++) pop = pop + (LD+1)'(dac_bits[r]);
  end

  for (genvar k = 0; k < SLICES; k++) begin : g_slice
    puma_xbar #(.DIM(DIM), .CELLW(2), .ADC_W(ADC_W)) u_xbar (
      .clk     (clk),
      .w_we    (w_we),
      .w_row   (w_row),
      .w_col   (w_col),
      .w_cell  (w_off[2*k +: 2]),
      .dac_bits(dac_bits),
      .col_sel (col),
      .adc_out (adc[k])
    );
  end

  // shift-and-add of the eight slices for the current column and input bit
  logic signed [39:0] colsum, term;
  always_comb begin
    colsum = '0;
    for (int k = 0; k < SLICES; k++)
      colsum = colsum + (40'(adc[k]) <<< (2 * k));
    colsum = colsum - (40'(pop) <<< 15);
    term   = colsum <<< bitn;
    last   = (bitn == 4'd15) && (col == LD'(DIM - 1));
  end

  // XbarIn registers
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int i = 0; i < DIM; i++) xin[i] <= '0;
    else if (xin_we) xin[xin_addr] <= xin_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      col  <= '0;
      bitn <= '0;
      off  <= '0;
      for (int i = 0; i < DIM; i++) begin
        acc[i]  <= '0;
        xout[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        col  <= '0;
        bitn <= '0;
        off  <= LD'(32'(filter) * 32'(stride));
        for (int i = 0; i < DIM; i++) acc[i] <= '0;
      end else if (busy) begin
        if (bitn == 4'd15) acc[col] <= acc[col] - term;   // sign bit
        else               acc[col] <= acc[col] + term;
        col <= col + 1'b1;
        if (col == LD'(DIM - 1)) bitn <= bitn + 1'b1;
        if (last) begin
          busy <= 1'b0;
          done <= 1'b1;
          for (int i = 0; i < DIM; i++) begin
            logic signed [39:0] v;
            v = (i == int'(col)) ? acc[i] - term : acc[i];
            xout[i] <= sat16(48'(v >>> FRAC_BITS));
          end
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_no_xin_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !xin_we)
    else $error("XbarIn written during an MVM");
`endif
endmodule
