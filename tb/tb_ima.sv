// tb_ima: end-to-end check of one IMA at its default size (8 mats x 2
// crossbars, 128 inputs).
//   STD mode : 256 neurons of random 16-bit weights are sliced into 2-bit
//              cells (slice s -> mat s, neuron group -> crossbar); the
//              reference reproduces the adaptive ADC (each reading truncated to
//              its window, saturation if a reading exceeds it) independently
//              of the design's window function. Small operands give exact
//              unsaturated results; large operands exercise saturation.
//   KARATSUBA: 128 neurons, W0/W1/(W0+W1) placed as the mapping requires; the
//              reference is the exact dot product scaled by 2^-10 and clamped;
//              one case keeps W1, X1 small but nonzero so that the 2^16 W1X1
//              term and its subtraction reach the kept output bits unsaturated.
// The cycle count of each operation and the number of iterations (16 vs 17)
// are checked, and fewer ADC comparisons must be used in STD mode than a
// full-resolution conversion would need.
module tb_ima;
  import newton_pkg::*;
  localparam int R = 128, C = 128, XPM = 2, SLOT = 11, NN = C * XPM;
  int checks = 0, failures = 0;
  int n_sat = 0, n_exact = 0;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0; logic [2:0] wr_mat; logic [0:0] wr_xbar; logic [6:0] wr_col;
  logic [C-1:0][1:0] wr_cells;
  logic in_we = 0; logic [6:0] in_idx; logic [15:0] in_data;
  logic start = 0; ima_mode_e mode; logic busy, done;
  logic [7:0] out_idx; logic [15:0] out_data;
  logic [31:0] adc_cmps; logic [4:0] iters;

  always #5 clk = ~clk;
  ima #(.XPM(XPM), .SLOT_CYC(SLOT)) dut (.*);

  logic [15:0] W [NN][R];
  logic [15:0] X [R];
  logic [1:0]  cellv [8][XPM][R][C];

  task automatic program_cells();
    for (int m = 0; m < 8; m++)
      for (int x = 0; x < XPM; x++)
        for (int c = 0; c < C; c++) begin
          for (int r = 0; r < R; r++) wr_cells[r] = cellv[m][x][r][c];
          wr_mat = 3'(m); wr_xbar = 1'(x); wr_col = 7'(c); wr_en = 1;
          @(posedge clk); #1;
        end
    wr_en = 0;
  endtask

  task automatic load_inputs();
    for (int r = 0; r < R; r++) begin
      in_idx = 7'(r); in_data = X[r]; in_we = 1;
      @(posedge clk); #1;
    end
    in_we = 0;
  endtask

  task automatic run(input ima_mode_e md, output int cycles);
    mode = md; start = 1;
    @(posedge clk); #1 start = 0;
    cycles = 0;
    while (!done) begin @(posedge clk); #1; cycles++; end
  endtask

  // ---------------- STD reference (window rule written out independently)
  function automatic logic [15:0] ref_std(int n);
    longint acc;
    bit sat;
    acc = 0; sat = 0;
    for (int i = 0; i < 16; i++)
      for (int s = 0; s < 8; s++) begin
        int v, base, lo, top;
        v = 0;
        for (int r = 0; r < R; r++) if (X[r][i]) v += int'(W[n][r][2*s +: 2]);
        base = 2*s + i;
        lo  = (10 - base > 0) ? 10 - base : 0;
        top = (26 - base < 9) ? ((26 - base > 0) ? 26 - base : 0) : 9;
        if (top < 9 && v >= (1 << top)) sat = 1;
        else for (int b = lo; b < top; b++) if (v & (1 << b)) acc += longint'(1) << (base + b);
      end
    if (sat || (acc >> 26) != 0) return 16'hFFFF;
    return 16'(acc >> 10);
  endfunction

  function automatic logic [15:0] ref_exact(int n);
    longint acc;
    acc = 0;
    for (int r = 0; r < R; r++) acc += longint'(W[n][r]) * longint'(X[r]);
    if ((acc >> 26) != 0) return 16'hFFFF;
    return 16'(acc >> 10);
  endfunction

  task automatic test_std(input int wmax, input int xmax);
    int cyc, exp_cyc;
    for (int n = 0; n < NN; n++) for (int r = 0; r < R; r++) W[n][r] = 16'($urandom_range(wmax));
    for (int r = 0; r < R; r++) X[r] = 16'($urandom_range(xmax));
    for (int m = 0; m < 8; m++) for (int x = 0; x < XPM; x++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        cellv[m][x][r][c] = W[x*C + c][r][2*m +: 2];
    program_cells();
    load_inputs();
    run(MODE_STD, cyc);
    exp_cyc = 16 * (1 + XPM * C * SLOT) + 1;
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL STD cycles %0d exp %0d", cyc, exp_cyc); end
    checks++;
    if (iters != 5'd16) begin failures++; $display("FAIL STD iterations %0d", iters); end
    checks++;
    if (adc_cmps >= 32'(16 * 8 * NN * 9)) begin failures++; $display("FAIL no ADC saving: %0d", adc_cmps); end
    $display("STD: %0d ADC comparisons against %0d at full resolution", adc_cmps, 16 * 8 * NN * 9);
    for (int n = 0; n < NN; n++) begin
      logic [15:0] e;
      e = ref_std(n);
      out_idx = 8'(n); #1;
      checks++;
      if (out_data == 16'hFFFF) n_sat++; else n_exact++;
      if (out_data != e) begin failures++; if (failures < 10) $display("FAIL STD n%0d got %h exp %h", n, out_data, e); end
    end
  endtask

  task automatic test_kara(input int wmax, input int xmax);
    int cyc, exp_cyc;
    for (int n = 0; n < C; n++) for (int r = 0; r < R; r++) W[n][r] = 16'($urandom_range(wmax));
    for (int r = 0; r < R; r++) X[r] = 16'($urandom_range(xmax));
    for (int m = 0; m < 8; m++) for (int x = 0; x < XPM; x++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        logic [9:0] wsum;
        wsum = 10'(W[c][r][7:0]) + 10'(W[c][r][15:8]);
        if (x == 0) cellv[m][x][r][c] = (m < 4) ? W[c][r][2*m +: 2] : W[c][r][8 + 2*(m-4) +: 2];
        else        cellv[m][x][r][c] = (m < 5) ? wsum[2*m +: 2] : 2'($urandom);  // mats 5-7: unused
      end
    program_cells();
    load_inputs();
    run(MODE_KARATSUBA, cyc);
    exp_cyc = 17 * (1 + C * SLOT) + 1;
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL KARATSUBA cycles %0d exp %0d", cyc, exp_cyc); end
    checks++;
    if (iters != 5'd17) begin failures++; $display("FAIL KARATSUBA iterations %0d", iters); end
    for (int n = 0; n < C; n++) begin
      logic [15:0] e;
      e = ref_exact(n);
      out_idx = 8'(n); #1;
      checks++;
      if (out_data != e) begin failures++; if (failures < 10) $display("FAIL KARA n%0d got %h exp %h", n, out_data, e); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    test_std(255, 1023);        // results inside the 16-bit window
    test_std(65535, 65535);     // saturation through the ADC overflow test
    test_std(4095, 8191);       // mixed
    test_kara(1023, 767);       // small nonzero high halves: the combine is visible
    test_kara(65535, 2047);
    test_kara(65535, 65535);
    checks++;
    if (n_sat == 0 || n_exact == 0) begin failures++; $display("FAIL saturated %0d exact %0d", n_sat, n_exact); end
    $display("saturated outputs %0d, in-range outputs %0d", n_sat, n_exact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
