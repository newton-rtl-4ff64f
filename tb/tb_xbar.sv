// tb_xbar: programs random 2-bit cells, applies random 1-bit row vectors and
// compares every bitline level seen through the multiplexer with an
// independently computed sum; the level must hold when the row drive changes.
module tb_xbar;
  localparam int R = 128, C = 128;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, sample = 0;
  logic [6:0] wr_col;
  logic [C-1:0][1:0] wr_cells;
  logic [R-1:0] rows_in;
  logic [6:0] col;
  logic [8:0] col_level;
  logic [R-1:0] sampled;
  logic [1:0] ref_cell [R][C];

  always #5 clk = ~clk;
  xbar dut (.*);

  initial begin
    for (int c = 0; c < C; c++) begin
      for (int r = 0; r < R; r++) begin
        ref_cell[r][c] = (r < 2) ? 2'd3 : 2'($urandom);
        wr_cells[r] = ref_cell[r][c];
      end
      wr_col = 7'(c); wr_en = 1;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int t = 0; t < 6; t++) begin
      for (int r = 0; r < R; r++) rows_in[r] = (t == 0) ? 1'b1 : 1'($urandom);
      sample = 1; @(posedge clk); #1 sample = 0;
      sampled = rows_in;
      rows_in = ~rows_in;   // the held levels must not follow the new drive
      for (int c = 0; c < C; c++) begin
        int e;
        col = 7'(c); #1;
        e = 0;
        for (int r = 0; r < R; r++) if (sampled[r]) e += int'(ref_cell[r][c]);
        checks++;
        if (int'(col_level) != e) begin failures++; $display("FAIL col %0d got %0d exp %0d", c, col_level, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
