// tb_cic_response: frequency response of the CIC filter at its default
// size (N = 5, R = 16, M = 1, 6.144 MHz input rate, 384 kHz output rate).
//
// For each test frequency a sine of amplitude 14 is turned into the 5-bit
// input stream by a first-order error-feedback quantiser (unity signal
// gain, noise pushed to high frequencies). After the filter has settled,
// the amplitude of that frequency in s_out is measured by correlation with
// a sine and a cosine over 2048 output samples. It is compared with the
// theoretical CIC response
//   |H(f)| / (RM)^N = | sin(pi f R / fs) / (R sin(pi f / fs)) |^5
// times the input amplitude and the 2^11 gain from the 5-bit input to the
// top 16 bits of the 25-bit word. Tolerances grow with the attenuation
// because the truncation noise (about 59 LSB rms) is fixed: 0.3 dB at
// 20 kHz and 100 kHz, 0.5 dB at 200 kHz, 3 dB at 300 kHz; at 550 kHz, near
// the peak of the first side lobe (about -65 dB), the measured level must
// only stay below -50 dB. A DC test checks the gain of 2^11 directly.
module tb_cic_response;
  localparam real FS = 6.144e6;
  localparam int  NOUT = 2048;
  localparam int  SETTLE = 16 * 20;
  localparam int  NF = 5;

  logic        clk = 0, rst_n;
  logic [4:0]  a_in;
  logic [15:0] s_out;
  logic        s_valid;
  int          checks = 0, failures = 0;
  real         freqs [NF] = '{20.0e3, 100.0e3, 200.0e3, 300.0e3, 550.0e3};
  real         tol   [NF] = '{0.3, 0.3, 0.5, 3.0, 0.0};

  cic_filter dut (.clk(clk), .rst_n(rst_n), .a_in(a_in), .s_out(s_out), .s_valid(s_valid));

  always #5 clk = ~clk;

  function automatic real cic_gain(real f);
    real x = 3.14159265358979 * f / FS;
    return $pow($sin(16.0 * x) / (16.0 * $sin(x)), 5.0);
  endfunction

  // one measurement: returns the output amplitude at f in LSB
  task automatic measure(real f, real amp, output real a_out);
    real e, u, si, co;
    int  q, n, m;
    e = 0.0; si = 0.0; co = 0.0; n = 0; m = 0;
    rst_n = 0;
    a_in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (m < NOUT) begin
      u = amp * $cos(2.0 * 3.14159265358979 * f * n / FS);
      q = int'($floor(u - e + 0.5));
      if (q > 15) q = 15;
      if (q < -16) q = -16;
      e = real'(q) - (u - e);
      a_in = 5'(q);
      @(posedge clk);
      #1;
      if (s_valid && n >= SETTLE) begin
        si += real'($signed(s_out)) * $sin(2.0 * 3.14159265358979 * f * n / FS);
        co += real'($signed(s_out)) * $cos(2.0 * 3.14159265358979 * f * n / FS);
        m++;
      end
      n++;
    end
    a_out = 2.0 * $sqrt(si * si + co * co) / NOUT;
  endtask

  initial begin
    real a, want, db;
    // DC: constant input 7 must settle to 7 * 2^11 within the truncation noise
    rst_n = 0;
    a_in = 5'd7;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat (16 * 40) @(posedge clk);
    #1;
    $display("DC: input 7, output %0d, expected %0d", $signed(s_out), 7 * 2048);
    checks++;
    if ($signed(s_out) > 7 * 2048 + 64 || $signed(s_out) < 7 * 2048 - 64) failures++;
    for (int i = 0; i < NF; i++) begin
      measure(freqs[i], 14.0, a);
      want = 14.0 * 2048.0 * cic_gain(freqs[i]);
      db = 20.0 * $log10(a / (14.0 * 2048.0));
      $display("f = %0.0f Hz: measured %0.2f dB, theory %0.2f dB", freqs[i], db,
               20.0 * $log10(cic_gain(freqs[i]) < 0 ? -cic_gain(freqs[i]) : cic_gain(freqs[i])));
      checks++;
      if (tol[i] > 0.0) begin
        if (db - 20.0 * $log10(want < 0 ? -want / (14.0 * 2048.0) : want / (14.0 * 2048.0)) > tol[i] ||
            20.0 * $log10(want < 0 ? -want / (14.0 * 2048.0) : want / (14.0 * 2048.0)) - db > tol[i])
          failures++;
      end else begin
        if (db > -50.0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * (16 * 40 + NF * (NOUT * 16 + SETTLE + 100)));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
