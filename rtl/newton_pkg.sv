// newton_pkg: sizes and helpers shared by the crossbar datapath.
//
// A 16-bit weight is split into eight 2-bit slices held in eight different
// 128x128 crossbars; a 16-bit input is applied one bit per iteration through
// 1-bit DACs, so one bitline reading is at most 128*3 and needs a 9-bit ADC.
// Slice s read in iteration i carries weight 2^(2s+i). The full product is
// 39 bits wide; the 16-bit fixed-point result keeps bits [25:10], drops the
// 10 LSBs and clamps to 0xFFFF when any of the 13 upper bits is set.
//
// adc_window() returns, for a slice/iteration pair, which bits of the 9-bit
// reading can reach the kept window. These sizes and the window follow the
// paper; the struct encoding is this design's own.
package newton_pkg;

  localparam int unsigned ROWS      = 128;  // crossbar wordlines (inputs per IMA)
  localparam int unsigned COLS      = 128;  // crossbar bitlines
  localparam int unsigned CELL_BITS = 2;    // bits per memristor cell
  localparam int unsigned IN_BITS   = 16;   // input precision, one bit per iteration
  localparam int unsigned W_BITS    = 16;   // weight precision
  localparam int unsigned SLICES    = W_BITS / CELL_BITS;  // 8 crossbars per weight
  localparam int unsigned ADC_BITS  = 9;    // full resolution of one bitline reading
  localparam int unsigned DROP_LSB  = 10;   // LSBs dropped by the scaling factor
  localparam int unsigned OUT_BITS  = 16;   // fixed-point output width
  localparam int unsigned ACC_W     = 40;   // exact accumulation of a 16x16 dot product over 128 rows
  localparam int unsigned N_MATS    = 8;    // mats per IMA (three-level HTree)

  typedef enum logic [0:0] {
    MODE_STD       = 1'b0,  // 16 iterations, adaptive ADC, 128 x XPM neurons
    MODE_KARATSUBA = 1'b1   // 8 + 9 iterations, full-resolution ADC, 128 neurons
  } ima_mode_e;

  // Resolution setting of the tunable ADC for one conversion.
  // conv     : resolve bits top-1 .. lo of the reading
  // ovf_test : first test reading >= 2^top; true means the output must clamp
  typedef struct packed {
    logic       conv;
    logic       ovf_test;
    logic [3:0] lo;
    logic [3:0] top;
  } adc_cfg_t;

  localparam adc_cfg_t ADC_FULL_RES = '{conv: 1'b1, ovf_test: 1'b0, lo: 4'd0, top: 4'(ADC_BITS)};

  // Window of reading bits that land inside result bits [DROP_LSB +: OUT_BITS].
  function automatic adc_cfg_t adc_window(input int unsigned slice, input int unsigned iter);
    adc_cfg_t c;
    int base, lo, top;
    base = 2 * int'(slice) + int'(iter);
    lo   = int'(DROP_LSB) - base;
    top  = int'(DROP_LSB + OUT_BITS) - base;   // first bit position above the window
    if (lo < 0) lo = 0;
    if (top > int'(ADC_BITS)) top = int'(ADC_BITS);
    if (top < 0) top = 0;
    c.conv     = (lo < top);
    c.ovf_test = (top < int'(ADC_BITS));
    c.lo       = c.conv ? 4'(lo) : 4'd0;
    c.top      = 4'(top);
    return c;
  endfunction

  // Number of result bits a conversion resolves (the quantity of Fig. 5 style grids).
  function automatic int unsigned adc_bits(input adc_cfg_t c);
    return c.conv ? int'(c.top) - int'(c.lo) : 0;
  endfunction

endpackage
