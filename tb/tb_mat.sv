// tb_mat: programs both crossbars of a mat with random cells, samples a random
// row vector, converts every bitline of both crossbars at full resolution and
// with adaptive windows, and compares with an independent model.
module tb_mat;
  import newton_pkg::*;
  localparam int R = 128, C = 128, X = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0, sample = 0, adc_start = 0;
  logic [0:0] wr_xbar, xsel;
  logic [6:0] wr_col, col;
  logic [C-1:0][1:0] wr_cells;
  logic [R-1:0] rows_in;
  adc_cfg_t cfg;
  logic adc_busy, adc_done, adc_cmp, ovf;
  logic [8:0] code;
  logic [1:0] ref_cell [X][R][C];

  always #5 clk = ~clk;
  mat #(.XPM(2)) dut (.*);

  initial begin
    cfg = ADC_FULL_RES; xsel = 0; col = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int x = 0; x < X; x++)
      for (int c = 0; c < C; c++) begin
        for (int r = 0; r < R; r++) begin ref_cell[x][r][c] = 2'($urandom); wr_cells[r] = ref_cell[x][r][c]; end
        wr_xbar = 1'(x); wr_col = 7'(c); wr_en = 1;
        @(posedge clk); #1;
      end
    wr_en = 0;
    for (int t = 0; t < 3; t++) begin
      for (int r = 0; r < R; r++) rows_in[r] = 1'($urandom);
      sample = 1; @(posedge clk); #1 sample = 0;
      rows_in = '0;   // held values must survive a change of the row drive
      for (int x = 0; x < X; x++)
        for (int c = 0; c < C; c++) begin
          int v, lo, top;
          logic eovf;
          int ecode;
          v = 0;
          xsel = 1'(x); col = 7'(c);
          if (t == 0) cfg = ADC_FULL_RES;
          else        cfg = adc_window($urandom_range(7), $urandom_range(15));
          adc_start = 1; @(posedge clk); #1 adc_start = 0;
          while (!adc_done) begin @(posedge clk); #1; end
          v = held_ref(x, c);
          lo = int'(cfg.lo); top = int'(cfg.top);
          eovf = cfg.ovf_test && (v >= (1 << top));
          ecode = 0;
          if (cfg.conv) for (int b = lo; b < top; b++) ecode |= v & (1 << b);
          checks++;
          if (ovf != eovf || (!eovf && int'(code) != ecode)) begin
            failures++;
            $display("FAIL x%0d c%0d v=%0d code=%0d ovf=%0b exp %0d/%0b", x, c, v, code, ovf, ecode, eovf);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference bitline value for the most recent sample
  logic [R-1:0] sampled_rows;
  always @(posedge clk) if (sample) sampled_rows <= rows_in;
  function automatic int held_ref(int x, int c);
    int s;
    s = 0;
    for (int r = 0; r < R; r++) if (sampled_rows[r]) s += int'(ref_cell[x][r][c]);
    return s;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
