// tb_adc_window: checks the adaptive-ADC window against the published
// resolution grid (16 iterations x 8 weight slices, value = bits resolved)
// and checks the overflow-test flag: needed exactly when some reading bit
// lies above result bit 25.
module tb_adc_window;
  import newton_pkg::*;
  int checks = 0, failures = 0;
  logic [2:0] slice;
  logic [3:0] iter;
  adc_cfg_t   cfg;
  logic [3:0] nbits;

  adc_window dut (.slice(slice), .iter(iter), .cfg(cfg), .nbits(nbits));

  // grid[i][k] for slices S7..S0 (k = 0 is S7)
  int grid [16][8] = '{
    '{9,9,9,7, 5,3,1,0}, '{9,9,9,8, 6,4,2,0}, '{9,9,9,9, 7,5,3,1}, '{9,9,9,9, 8,6,4,2},
    '{8,9,9,9, 9,7,5,3}, '{7,9,9,9, 9,8,6,4}, '{6,8,9,9, 9,9,7,5}, '{5,7,9,9, 9,9,8,6},
    '{4,6,8,9, 9,9,9,7}, '{3,5,7,9, 9,9,9,8}, '{2,4,6,8, 9,9,9,9}, '{1,3,5,7, 9,9,9,9},
    '{0,2,4,6, 8,9,9,9}, '{0,1,3,5, 7,9,9,9}, '{0,0,2,4, 6,8,9,9}, '{0,0,1,3, 5,7,9,9}};

  initial begin
    for (int i = 0; i < 16; i++) begin
      for (int s = 0; s < 8; s++) begin
        bit exp_ovf;
        slice = 3'(s);
        iter  = 4'(i);
        #1;
        checks++;
        if (int'(nbits) != grid[i][7-s]) begin
          failures++;
          $display("FAIL iter %0d S%0d: nbits %0d expected %0d", i, s, nbits, grid[i][7-s]);
        end
        exp_ovf = (2*s + i + 8) > 25;
        checks++;
        if (cfg.ovf_test != exp_ovf) begin
          failures++;
          $display("FAIL iter %0d S%0d: ovf_test %0b", i, s, cfg.ovf_test);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
