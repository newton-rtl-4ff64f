// tb_serial_preadder: feeds random 8-bit pairs LSB first (plus one carry-out
// step) and rebuilds the 9-bit sums from the serial output bits.
module tb_serial_preadder;
  localparam int N = 128;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  logic [N-1:0] a, b, s;
  logic [7:0] x0 [N], x1 [N];
  logic [8:0] got [N];

  always #5 clk = ~clk;
  serial_preadder #(.N(N)) dut (.*);

  initial begin
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int r = 0; r < N; r++) begin
        x0[r] = 8'($urandom); x1[r] = 8'($urandom);
        if (rep == 0) begin x0[r] = 8'hFF; x1[r] = 8'hFF; end
      end
      clear = 1; @(posedge clk); #1 clear = 0;
      for (int t = 0; t < 9; t++) begin
        for (int r = 0; r < N; r++) begin
          a[r] = (t < 8) ? x0[r][t] : 1'b0;
          b[r] = (t < 8) ? x1[r][t] : 1'b0;
        end
        #1;
        for (int r = 0; r < N; r++) got[r][t] = s[r];
        step = 1; @(posedge clk); #1 step = 0;
      end
      for (int r = 0; r < N; r++) begin
        checks++;
        if (got[r] != 9'(x0[r]) + 9'(x1[r])) begin
          failures++;
          $display("FAIL row %0d: %0d + %0d -> %0d", r, x0[r], x1[r], got[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
