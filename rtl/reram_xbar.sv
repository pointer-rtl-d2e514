// reram_xbar -- behavioural model of one ReRAM crossbar array with its
// wordline DACs, bitline sample-and-hold and ADC.
//
// The real part is analog: each cell stores a CELL_BITS-bit conductance,
// wordline i is driven with a 1-bit input voltage, and bitline j carries the
// current sum_i in[i]*G[i][j]. This model gives the exact digital value that
// an ideal (lossless) ADC would read: for every column, the sum over the
// cell bit planes of popcount(in & plane) << plane. ROWS x COLS = 128 x 128
// and 2 bits per cell are the figures of the source architecture; the 1-bit
// DAC and the lossless 9-bit ADC are this model's assumptions.
//
// Interface: prog_en writes prog_val into cell (prog_row, prog_col) at the
// clock edge (no read-back). sample latches in_bits; col_sum holds the ADC
// codes of all columns from the next cycle on. Cells are non-volatile and
// are not cleared by reset.
module reram_xbar #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned CELL_BITS = 2,
  localparam int unsigned SUM_W    = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                       clk,
  input  logic                       prog_en,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  logic [$clog2(COLS)-1:0]    prog_col,
  input  logic [CELL_BITS-1:0]       prog_val,
  input  logic                       sample,
  input  logic [ROWS-1:0]            in_bits,
  output logic [COLS-1:0][SUM_W-1:0] col_sum
);
  // plane[b][j] holds bit b of the cells of column j, one bit per row
  logic [ROWS-1:0] plane [CELL_BITS][COLS];

  always_ff @(posedge clk) begin
    if (prog_en)
      for (int b = 0; b < CELL_BITS; b++)
        plane[b][prog_col][prog_row] <= prog_val[b];
  end

  always_ff @(posedge clk) begin
    if (sample)
      for (int j = 0; j < COLS; j++) begin
        logic [SUM_W-1:0] s;
        s = '0;
        for (int b = 0; b < CELL_BITS; b++)
          s = s + (SUM_W'($countones(in_bits & plane[b][j])) << b);
        col_sum[j] <= s;
      end
  end
endmodule
