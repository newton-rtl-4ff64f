// tb_strassen_adders: random signed 2x2 block "matrices" (scalars stand for
// blocks); the P products are formed from the unit's own X combinations and
// independently computed weight combinations, and the four outputs must equal
// the ordinary product Y = W X.
module tb_strassen_adders;
  int checks = 0, failures = 0;
  logic signed [16:0] p [7];
  logic signed [18:0] y00, y01, y10, y11;
  logic signed [16:0] x00, x01, x10, x11;
  logic signed [17:0] xc [7];

  strassen_adders #(.PW(17), .XW(17)) dut (.*);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int w00, w01, w10, w11, wc [7], e [7];
      w00 = $urandom_range(30) - 15; w01 = $urandom_range(30) - 15;
      w10 = $urandom_range(30) - 15; w11 = $urandom_range(30) - 15;
      x00 = 17'($signed($urandom_range(200)) - 100); x01 = 17'($signed($urandom_range(200)) - 100);
      x10 = 17'($signed($urandom_range(200)) - 100); x11 = 17'($signed($urandom_range(200)) - 100);
      #1;
      e = '{x01 - x11, x11, x00, x10 - x00, x00 + x11, x10 + x11, x00 + x01};
      for (int k = 0; k < 7; k++) begin
        checks++;
        if (int'(xc[k]) != e[k]) begin failures++; $display("FAIL xc%0d", k); end
      end
      wc = '{w00, w00 + w01, w10 + w11, w11, w00 + w11, w01 - w11, w00 - w10};
      for (int k = 0; k < 7; k++) p[k] = 17'(wc[k] * int'(xc[k]));
      #1;
      checks += 4;
      if (int'(y00) != w00 * x00 + w01 * x10) begin failures++; $display("FAIL y00"); end
      if (int'(y01) != w00 * x01 + w01 * x11) begin failures++; $display("FAIL y01"); end
      if (int'(y10) != w10 * x00 + w11 * x10) begin failures++; $display("FAIL y10"); end
      if (int'(y11) != w10 * x01 + w11 * x11) begin failures++; $display("FAIL y11"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
