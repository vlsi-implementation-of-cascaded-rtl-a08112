// tb_cic_comb: checks the comb stage out = in - in(M samples ago) for the
// default M = 1 and for M = 2. Inputs change randomly; en pulses at random
// cycles stand for the low-rate sample clock, and the expected output is
// worked out from a record of the inputs present at each en pulse.
// Between pulses the delay line must hold.
module tb_cic_comb;
  logic        clk = 0, rst_n, en;
  logic [15:0] in, out1, out2;
  logic [15:0] hist [$];
  int          checks = 0, failures = 0;

  cic_comb            dut1 (.clk(clk), .rst_n(rst_n), .en(en), .in(in), .out(out1));
  cic_comb #(.M(2))   dut2 (.clk(clk), .rst_n(rst_n), .en(en), .in(in), .out(out2));

  always #5 clk = ~clk;

  function automatic logic [15:0] past(int k);
    // input captured k pulses ago (1 = most recent), 0 before reset history
    return (hist.size() >= k) ? hist[hist.size() - k] : 16'd0;
  endfunction

  initial begin
    rst_n = 0;
    en = 0;
    in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      in = 16'($urandom);
      en = ($urandom_range(0, 3) == 0);
      #1;
      checks++;
      if (out1 != 16'(in - past(1))) failures++;
      checks++;
      if (out2 != 16'(in - past(2))) failures++;
      @(posedge clk);
      if (en) hist.push_back(in);
      #1;
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
