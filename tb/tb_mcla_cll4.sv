// tb_mcla_cll4: exhaustive check of the 4-bit carry look-ahead block.
// For every p[3:0], g[3:0], c0 the carries are compared with a bit-serial
// ripple c[i+1] = g[i] | p[i] & c[i]; P_G with "all bits propagate" and G_G
// with the ripple carry out of the group for c0 = 0.
module tb_mcla_cll4;
  logic [3:0] p, g;
  logic       c0, pg, gg;
  logic [4:1] c;
  int         checks = 0, failures = 0;

  mcla_cll4 dut (.p(p), .g(g), .c0(c0), .c(c), .pg(pg), .gg(gg));

  function automatic logic [4:0] ripple(logic [3:0] pp, logic [3:0] gv, logic cin);
    logic [4:0] r;
    r[0] = cin;
    for (int i = 0; i < 4; i++) r[i+1] = gv[i] | (pp[i] & r[i]);
    return r;
  endfunction

  initial begin
    for (int v = 0; v < 512; v++) begin
      {p, g, c0} = 9'(v);
      #1;
      checks++;
      if (c != ripple(p, g, c0)[4:1]) failures++;
      checks++;
      if (pg != (p == 4'hf)) failures++;
      checks++;
      if (gg != ripple(p, g, 1'b0)[4]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
