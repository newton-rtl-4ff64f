// xbar: behavioural model of one 128x128 memristor crossbar with 2-bit cells,
// its 1-bit DAC row drivers, the sample-and-hold on the bitlines and the
// 128:1 bitline multiplexer in front of the ADC.
//
// This is a model of an analog part, not synthesizable hardware of the real
// device. Each cell stores a conductance level 0..3; with the 1-bit DAC rows
// driven by `rows_in`, bitline c carries sum_r rows_in[r] * cell(r,c). When
// `sample` is high at a clock edge the sample-and-hold freezes all bitlines.
// The model stores the sampled row drive instead of 128 held levels (the
// cells do not change between sample and conversion, so the information is
// the same) and evaluates the ideal, noise-free level of the bitline chosen
// by `col` on `col_level`, which is what the multiplexer hands to the ADC.
// Reprogramming cells between a sample and its conversions is not allowed.
// Cells are programmed one bitline (column of 128 cells) per cycle through
// `wr_*`; programming is slow in silicon. The crossbar and cell sizes follow
// the paper; the programming port is this design's own.
module xbar #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned CELL_BITS = 2,
  parameter int unsigned SUM_W     = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                           clk,
  input  logic                           wr_en,
  input  logic [$clog2(COLS)-1:0]        wr_col,
  input  logic [ROWS-1:0][CELL_BITS-1:0] wr_cells,   // cells of bitline wr_col, by row
  input  logic [ROWS-1:0]                rows_in,
  input  logic                           sample,
  input  logic [$clog2(COLS)-1:0]        col,
  output logic [SUM_W-1:0]               col_level
);
  logic [ROWS-1:0][CELL_BITS-1:0] cells_q [COLS];    // one word per bitline
  logic [ROWS-1:0][CELL_BITS-1:0] line;
  logic [ROWS-1:0]                held_rows;

  always_ff @(posedge clk) begin
    if (wr_en)  cells_q[wr_col] <= wr_cells;
    if (sample) held_rows <= rows_in;
  end

  assign line = cells_q[col];

  always_comb begin
    col_level = '0;
    for (int r = 0; r < int'(ROWS); r++)
      if (held_rows[r]) col_level += SUM_W'(line[r]);
  end
endmodule
