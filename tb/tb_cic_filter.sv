// tb_cic_filter: end-to-end check of the five-stage CIC decimator at its
// default size (N = 5, R = 16, M = 1, 5-bit input, 25/22/20/18/16-bit
// integrators, 16-bit combs).
//
// Two references, both computed here without the design's structure:
//  * a bit-exact integer model of the truncated, pipelined filter (each
//    integrator adds the previous stage's value of the last cycle, keeping
//    its top W bits; one sample in 16 is kept; the combs subtract the
//    previous kept value). It is compared with s_out every cycle, so it also
//    checks the latency, the 1-in-16 output rate and the s_valid timing.
//  * the ideal filter as a direct convolution with the 76 coefficients of
//    (1 + z^-1 + ... + z^-15)^5, delayed by the 5 pipeline cycles. The
//    error of the 16-bit output against ideal/2^9 comes only from the
//    truncations. With uniform, independent truncation errors its standard
//    deviation is sqrt(sum_j 2^(2 B_j)/12 * F_j^2) / 2^9 = 59 LSB, where B_j
//    = 3, 5, 7, 9 bits are dropped before integrators 2..5 and F_j^2 is the
//    power gain from there to the output. The check allows an rms error of
//    90 LSB and a mean error of 10 LSB.
// The input is a random 5-bit stream in the first half and a slow full
// swing (-16 .. 15 triangle) in the second.
module tb_cic_filter;
  localparam int unsigned R = 16;
  localparam int unsigned NS = 5;
  localparam int          NCYC = 16000;
  localparam int          WID [NS] = '{25, 22, 20, 18, 16};

  logic        clk = 0, rst_n;
  logic [4:0]  a_in;
  logic [15:0] s_out;
  logic        s_valid;

  int          checks = 0, failures = 0, n_out = 0, last_out = -1;
  longint      h [76];
  int          xs [NCYC];
  longint      acc [NS], acc_n [NS], ds, dly [NS], cv, nx, ideal;
  int          ph;
  int          cnt;
  real         err, esum = 0.0, e2sum = 0.0;

  cic_filter dut (.clk(clk), .rst_n(rst_n), .a_in(a_in), .s_out(s_out), .s_valid(s_valid));

  always #5 clk = ~clk;

  function automatic longint wrap(longint v, int w);
    return v & ((64'sd1 << w) - 1);
  endfunction

  function automatic longint sx(longint v, int w);
    v = wrap(v, w);
    return (v >= (64'sd1 << (w - 1))) ? v - (64'sd1 << w) : v;
  endfunction

  // comb section output of the model, 16-bit two's complement, unsigned
  function automatic longint comb_out();
    longint c = ds;
    for (int k = 0; k < NS; k++) c = wrap(c - dly[k], 16);
    return c;
  endfunction

  initial begin
    // h = coefficients of (sum_{k<16} z^-k)^5
    longint t [76];
    for (int i = 0; i < 76; i++) h[i] = (i == 0);
    for (int s = 0; s < NS; s++) begin
      for (int i = 0; i < 76; i++) begin
        t[i] = 0;
        for (int k = 0; k < int'(R); k++) if (i - k >= 0) t[i] += h[i-k];
      end
      h = t;
    end
    for (int n = 0; n < NCYC; n++) begin
      if (n < NCYC / 2) xs[n] = int'($urandom_range(0, 31)) - 16;
      else begin
        ph = (n / 40) % 62;
        xs[n] = (ph < 31) ? ph - 16 : 46 - ph;
      end
    end
  end

  initial begin
    rst_n = 0;
    a_in = '0;
    for (int k = 0; k < NS; k++) begin acc[k] = 0; dly[k] = 0; end
    ds = 0;
    cnt = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (s_out != 0 || s_valid) failures++;
    for (int n = 0; n < NCYC; n++) begin
      a_in = 5'(xs[n]);
      @(posedge clk);
      #1;
      // model: state after the clock edge that ends cycle n
      acc_n[0] = wrap(acc[0] + longint'(xs[n]), WID[0]);
      for (int k = 1; k < NS; k++)
        acc_n[k] = wrap(acc[k] + (acc[k-1] >> (WID[k-1] - WID[k])), WID[k]);
      if (cnt == int'(R) - 1) begin
        cv = ds;
        for (int k = 0; k < NS; k++) begin
          nx = wrap(cv - dly[k], 16);
          dly[k] = cv;
          cv = nx;
        end
        ds = acc[NS-1];
      end
      acc = acc_n;
      checks++;
      if (longint'(s_out) != comb_out()) begin
        failures++;
        if (failures < 10) $display("cycle %0d: s_out %h model %h", n, s_out, comb_out());
      end
      checks++;
      if (s_valid != (cnt == int'(R) - 1)) failures++;
      if (s_valid) begin
        ideal = 0;
        for (int k = 0; k < 76; k++) if (n - 5 - k >= 0) ideal += h[k] * longint'(xs[n - 5 - k]);
        err = real'(sx(longint'(s_out), 16)) - real'(ideal) / 512.0;
        if (n >= 200) begin
          esum += err;
          e2sum += err * err;
          n_out++;
        end
        if (last_out >= 0) begin
          checks++;
          if (n - last_out != int'(R)) failures++;
        end
        last_out = n;
      end
      cnt = (cnt + 1) % int'(R);
    end
    $display("outputs %0d, mean error %f LSB, rms error %f LSB", n_out, esum / n_out, $sqrt(e2sum / n_out));
    checks++;
    if ($sqrt(e2sum / n_out) > 90.0) failures++;
    checks++;
    if (esum / n_out > 10.0 || esum / n_out < -10.0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #((NCYC + 100) * 10);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
