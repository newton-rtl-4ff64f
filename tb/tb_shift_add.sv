// tb_shift_add: random operands at the three HTree levels; sum must equal
// lo + hi * 2^SHIFT and the overflow flags must be ORed.
module tb_shift_add;
  int checks = 0, failures = 0;
  logic [8:0]  a0, b0;  logic [11:0] s0;
  logic [11:0] a1, b1;  logic [16:0] s1;
  logic [16:0] a2, b2;  logic [25:0] s2;
  logic oa, ob, o0, o1, o2;

  shift_add #(.LO_W(9),  .HI_W(9),  .SHIFT(2)) u0 (.lo(a0), .hi(b0), .lo_ovf(oa), .hi_ovf(ob), .sum(s0), .ovf(o0));
  shift_add #(.LO_W(12), .HI_W(12), .SHIFT(4)) u1 (.lo(a1), .hi(b1), .lo_ovf(oa), .hi_ovf(ob), .sum(s1), .ovf(o1));
  shift_add #(.LO_W(17), .HI_W(17), .SHIFT(8)) u2 (.lo(a2), .hi(b2), .lo_ovf(oa), .hi_ovf(ob), .sum(s2), .ovf(o2));

  initial begin
    for (int t = 0; t < 500; t++) begin
      a0 = 9'($urandom); b0 = 9'($urandom);
      a1 = 12'($urandom); b1 = 12'($urandom);
      a2 = 17'($urandom); b2 = 17'($urandom);
      if (t == 0) begin a0 = '1; b0 = '1; a1 = '1; b1 = '1; a2 = '1; b2 = '1; end
      oa = 1'($urandom); ob = 1'($urandom);
      #1;
      checks += 4;
      if (int'(s0) != int'(a0) + 4 * int'(b0))      begin failures++; $display("FAIL l1"); end
      if (int'(s1) != int'(a1) + 16 * int'(b1))     begin failures++; $display("FAIL l2"); end
      if (longint'(s2) != longint'(a2) + 256 * longint'(b2)) begin failures++; $display("FAIL l3"); end
      if ({o0, o1, o2} != {3{oa | ob}})             begin failures++; $display("FAIL ovf"); end
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
