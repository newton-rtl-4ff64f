// adc_window: resolution control of the adaptive ADC.
//
// For the crossbar holding weight slice `slice` (2 bits of significance 2*slice)
// read in input-bit iteration `iter`, the reading's bit p lands on result bit
// 2*slice+iter+p. Only result bits [25:10] survive scaling and clamping, so the
// ADC needs to resolve reading bits lo..top-1 and, when upper reading bits are
// cut off, one extra comparison against 2^top that flags saturation. The
// window rule follows the paper (its resolution grid is reproduced exactly);
// the output encoding is this design's own. Purely combinational.
module adc_window
  import newton_pkg::*;
(
  input  logic [2:0] slice,  // weight slice / mat index, 0 = least significant
  input  logic [3:0] iter,   // input bit being applied, 0 = LSB
  output adc_cfg_t   cfg,    // setting for the tunable ADC
  output logic [3:0] nbits   // resolved bits (0..9)
);
  always_comb begin
    cfg   = adc_window(int'(slice), int'(iter));
    nbits = 4'(adc_bits(cfg));
  end
endmodule
