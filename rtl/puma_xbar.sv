// puma_xbar: BEHAVIOURAL MODEL of one 2-bit memristor crossbar with its
// integrators, column multiplexer and ADC. It is analog in the real part and
// is modelled here only so that the digital MVMU around it can be simulated.
//
// The crossbar holds a DIM x DIM matrix of 2-bit conductance levels. The DAC
// array drives each row with one input bit (1-bit DACs, an assumption of this
// design); each column current is the sum of the driven rows' conductances.
// The integrators hold those sums, the multiplexer selects column `col_sel`
// and the ADC returns its value as an unsigned integer of ADC_W bits.
// The ADC is taken to be wide enough to be lossless (9 bits for 128 rows of
// 2-bit cells); the real converter's resolution is not given.
//
// Interface
//   w_we/w_row/w_col/w_cell  serial write of one cell at configuration time
//   dac_bits                 one bit per row, as applied by the DAC array
//   col_sel / adc_out        column selected by the multiplexer and its
//                            digitised value, available in the same cycle
module puma_xbar #(
  parameter int unsigned DIM   = 128,
  parameter int unsigned CELLW = 2,
  parameter int unsigned ADC_W = $clog2(DIM * ((1 << CELLW) - 1) + 1)
) (
  input  logic                     clk,
  input  logic                     w_we,
  input  logic [$clog2(DIM)-1:0]   w_row,
  input  logic [$clog2(DIM)-1:0]   w_col,
  input  logic [CELLW-1:0]         w_cell,
  input  logic [DIM-1:0]           dac_bits,
  input  logic [$clog2(DIM)-1:0]   col_sel,
  output logic [ADC_W-1:0]         adc_out
);
  // conductance states, stored column-major
  logic [CELLW-1:0] g [DIM][DIM];

  always_ff @(posedge clk)
    if (w_we) g[w_col][w_row] <= w_cell;

  // Kirchhoff sum of the selected column
  always_comb begin
    adc_out = '0;
    for (int r = 0; r < DIM; r++)
      if (dac_bits[r]) adc_out = adc_out + ADC_W'(g[col_sel][r]);
  end
endmodule
