// tb_edram_buffer: random writes and reads against a reference array, with
// the one-cycle read latency and read-during-write (old data) checked.
module tb_edram_buffer;
  localparam int WORDS = 8192;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [12:0] waddr, raddr;
  logic [15:0] wdata, rdata;
  logic [15:0] ref_mem [WORDS];

  always #5 clk = ~clk;
  edram_buffer dut (.*);

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      ref_mem[a] = 16'($urandom);
      we = 1; waddr = 13'(a); wdata = ref_mem[a];
      @(posedge clk); #1;
    end
    we = 0;
    for (int t = 0; t < 4000; t++) begin
      logic [15:0] exp_d;
      raddr = 13'($urandom); re = 1;
      we = 1'($urandom); waddr = (t % 7 == 0) ? raddr : 13'($urandom); wdata = 16'($urandom);
      exp_d = ref_mem[raddr];
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      checks++;
      if (rdata != exp_d) begin failures++; $display("FAIL addr %0d got %h exp %h", raddr, rdata, exp_d); end
      // held while re is low
      re = 0; we = 0;
      @(posedge clk); #1;
      checks++;
      if (rdata != exp_d) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
