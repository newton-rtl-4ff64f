// tb_tunable_sar_adc: random readings and random windows. Expected result:
// overflow iff the window has an overflow test and reading >= 2^top; otherwise
// the reading with bits outside [top-1:lo] cleared. Also checks the number of
// comparison cycles (1 for the overflow test + top-lo for the search).
module tb_tunable_sar_adc;
  import newton_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [8:0] vin;
  adc_cfg_t cfg;
  logic busy, done, cmp, ovf;
  logic [8:0] code;

  always #5 clk = ~clk;

  tunable_sar_adc dut (.*);

  task automatic convert(input logic [8:0] v, input adc_cfg_t c);
    int ncmp, exp_cmp;
    logic [8:0] exp_code;
    logic exp_ovf;
    vin = v; cfg = c; start = 1;
    @(posedge clk); #1 start = 0;
    ncmp = 0;
    while (!done) begin
      if (cmp) ncmp++;
      @(posedge clk); #1;
    end
    exp_ovf = c.ovf_test && (10'(v) >= (10'd1 << c.top));
    exp_code = 0;
    if (!exp_ovf && c.conv)
      for (int b = int'(c.lo); b < int'(c.top); b++) exp_code[b] = v[b];
    exp_cmp = (c.ovf_test ? 1 : 0) + ((!exp_ovf && c.conv) ? int'(c.top) - int'(c.lo) : 0);
    checks += 3;
    if (ovf != exp_ovf)   begin failures++; $display("FAIL ovf v=%0d", v); end
    if (!exp_ovf && code != exp_code) begin failures++; $display("FAIL code v=%0d got %0d exp %0d lo=%0d top=%0d", v, code, exp_code, c.lo, c.top); end
    if (ncmp != exp_cmp)  begin failures++; $display("FAIL cmp count %0d exp %0d", ncmp, exp_cmp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    convert(9'd300, ADC_FULL_RES);
    convert(9'd384, ADC_FULL_RES);
    for (int t = 0; t < 400; t++) begin
      adc_cfg_t c;
      c = adc_window($urandom_range(7), $urandom_range(15));
      convert(9'($urandom_range(384)), c);
      convert(9'($urandom_range(3)), c);   // small readings exercise the lower windows
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
