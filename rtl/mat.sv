// mat: XPM crossbars sharing one DAC row drive and one tunable ADC.
//
// All crossbars of a mat see the same 1-bit row vector (the shared DAC) and
// capture their bitlines together on `sample` (sample-and-hold). For a
// conversion, a 128:1 multiplexer per crossbar picks bitline `col`, an XPM:1
// multiplexer picks crossbar `xsel`, and the tunable ADC resolves it with the
// resolution `cfg`. Conv tiles use XPM = 2 (two crossbars per ADC), classifier
// tiles XPM = 4. Crossbars are programmed one bitline (column) at a time via `wr_*`.
// Timing: `sample` at edge k makes the held sums valid after edge k; a start at
// a later edge returns `code`/`ovf` with `done` at most ADC_BITS+1 edges later.
// The mat organisation follows the paper; the port protocol is this design's.
module mat
  import newton_pkg::*;
#(
  parameter int unsigned XPM   = 2,
  parameter int unsigned SUM_W = $clog2(ROWS * 3 + 1),
  localparam int unsigned XW   = (XPM > 1) ? $clog2(XPM) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // crossbar programming
  input  logic                           wr_en,
  input  logic [XW-1:0]                  wr_xbar,
  input  logic [$clog2(COLS)-1:0]        wr_col,
  input  logic [ROWS-1:0][CELL_BITS-1:0] wr_cells,
  // analog front end
  input  logic [ROWS-1:0]                rows_in,
  input  logic                           sample,
  // conversion
  input  logic                           adc_start,
  input  logic [XW-1:0]                  xsel,
  input  logic [$clog2(COLS)-1:0]        col,
  input  adc_cfg_t                       cfg,
  output logic                           adc_busy,
  output logic                           adc_done,
  output logic                           adc_cmp,
  output logic [SUM_W-1:0]               code,
  output logic                           ovf
);
  logic [SUM_W-1:0]           col_mux [XPM];
  logic [SUM_W-1:0]           vin;

  for (genvar x = 0; x < int'(XPM); x++) begin : g_xbar
    xbar #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS), .SUM_W(SUM_W)) u_xbar (
      .clk      (clk),
      .wr_en    (wr_en && (wr_xbar == XW'(x))),
      .wr_col    (wr_col),
      .wr_cells (wr_cells),
      .rows_in  (rows_in),
      .sample   (sample),
      .col      (col),                 // 128:1 bitline multiplexer
      .col_level(col_mux[x])
    );
  end

  assign vin = col_mux[xsel];           // XPM:1 crossbar multiplexer

  tunable_sar_adc #(.BITS(SUM_W)) u_adc (
    .clk   (clk),
    .rst_n (rst_n),
    .start (adc_start),
    .vin   (vin),
    .cfg   (cfg),
    .busy  (adc_busy),
    .done  (adc_done),
    .cmp   (adc_cmp),
    .code  (code),
    .ovf   (ovf)
  );
endmodule
