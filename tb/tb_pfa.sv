// tb_pfa: exhaustive check of the partial full adder.
// All eight (a, b, c) inputs are applied; p and g are compared with the
// propagate/generate definitions and {g | p&c, s} with the arithmetic sum
// a + b + c.
module tb_pfa;
  logic a, b, c, s, p, g;
  int   checks = 0, failures = 0;

  pfa dut (.a(a), .b(b), .c(c), .s(s), .p(p), .g(g));

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      checks++;
      if (s != ((int'(a) + int'(b) + int'(c)) % 2 == 1)) failures++;
      checks++;
      if (p != (a != b)) failures++;
      checks++;
      if (g != (a && b)) failures++;
      checks++;
      if ((g | (p & c)) != (int'(a) + int'(b) + int'(c) >= 2)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
