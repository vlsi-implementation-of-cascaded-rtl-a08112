// tb_cic_integrator: checks a full-width (25-bit) and a truncating
// (25 -> 22 bit) integrator against an integer model of
// y[n+1] = (y[n] + (x[n] >> (IN_W - W))) mod 2**W, including reset, the
// one-cycle pipeline latency and wrap-around of the accumulator.
module tb_cic_integrator;
  logic        clk = 0, rst_n;
  logic [24:0] x;
  logic [24:0] y_full;
  logic [21:0] y_tr;
  longint      m_full, m_tr;
  int          checks = 0, failures = 0, wraps = 0;

  cic_integrator                     dut_full (.clk(clk), .rst_n(rst_n), .x(x), .y(y_full));
  cic_integrator #(.IN_W(25), .W(22)) dut_tr  (.clk(clk), .rst_n(rst_n), .x(x), .y(y_tr));

  always #5 clk = ~clk;

  initial begin
    rst_n = 0;
    x = '0;
    m_full = 0;
    m_tr = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (y_full != 0 || y_tr != 0) failures++;
    for (int n = 0; n < 5000; n++) begin
      x = (n < 2500) ? 25'($urandom) : 25'h0ffffff - 25'($urandom_range(0, 255));
      @(posedge clk);
      if (m_full + longint'(x) >= (64'sd1 << 25)) wraps++;
      m_full = (m_full + longint'(x)) % (64'sd1 << 25);
      m_tr   = (m_tr + longint'(x >> 3)) % (64'sd1 << 22);
      #1;
      checks++;
      if (longint'(y_full) != m_full) failures++;
      checks++;
      if (longint'(y_tr) != m_tr) failures++;
    end
    checks++;
    if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
