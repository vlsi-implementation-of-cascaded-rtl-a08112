// tb_decimator_snr: signal-to-noise ratio of the whole decimator at its
// default size, for an in-band tone.
//
// A 3 kHz cosine of amplitude 14 (of the 5-bit input's -16..15) is turned
// into the 6.144 MHz input stream by a first-order error-feedback quantiser
// standing in for the sigma-delta modulator. After the chain has settled,
// 1024 samples of the 48 kHz output are taken; 3 kHz is exactly 64 periods
// of that record, so the tone's amplitude, phase and the DC offset follow
// from plain projections on cos, sin and 1 without leakage. The residual
// after removing them is the noise.
//
// Expected: the chain's pass-band gain at 3 kHz is within 0.05 dB of one,
// so the tone must come out at 14 * 2^11 = 28672 LSB within 1 %. The noise
// is dominated by the CIC's truncation (about 59 LSB rms over the full
// 384 kHz band, of which the later filters keep roughly the lowest eighth),
// so the check requires an SNR of at least 50 dB and reports the value.
module tb_decimator_snr;
  localparam int  NREC = 1024;
  localparam int  SETTLE = 64;              // output samples skipped
  localparam real FS = 6.144e6;
  localparam real F0 = 3000.0;
  localparam real PI = 3.14159265358979;

  logic        clk = 0, rst_n;
  logic [4:0]  sd_in;
  logic [15:0] cic_out, pcm_out;
  logic        cic_valid, pcm_valid, pcm_clip;
  logic [2:0]  stage_clip;
  int          checks = 0, failures = 0;
  real         rec [NREC];

  cic_decimation_system dut (
    .clk(clk), .rst_n(rst_n), .sd_in(sd_in),
    .cic_out(cic_out), .cic_valid(cic_valid),
    .pcm_out(pcm_out), .pcm_valid(pcm_valid), .pcm_clip(pcm_clip),
    .stage_clip(stage_clip)
  );

  always #5 clk = ~clk;

  initial begin
    real u, e, a, b, c, amp, res, snr, fit;
    int  q, n, m, k;
    e = 0.0; n = 0; m = 0; k = 0;
    rst_n = 0;
    sd_in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (k < NREC) begin
      u = 14.0 * $cos(2.0 * PI * F0 * n / FS);
      q = int'($floor(u - e + 0.5));
      if (q > 15) q = 15;
      if (q < -16) q = -16;
      e = real'(q) - (u - e);
      sd_in = 5'(q);
      @(posedge clk);
      #1;
      if (pcm_valid) begin
        if (m >= SETTLE) begin
          rec[k] = real'($signed(pcm_out));
          k++;
        end
        m++;
        checks++;
        if (pcm_clip) failures++;
      end
      n++;
    end
    a = 0.0; b = 0.0; c = 0.0;
    for (int i = 0; i < NREC; i++) begin
      a += rec[i] * $cos(2.0 * PI * 64.0 * i / NREC);
      b += rec[i] * $sin(2.0 * PI * 64.0 * i / NREC);
      c += rec[i];
    end
    a = 2.0 * a / NREC;
    b = 2.0 * b / NREC;
    c = c / NREC;
    amp = $sqrt(a * a + b * b);
    res = 0.0;
    for (int i = 0; i < NREC; i++) begin
      fit = a * $cos(2.0 * PI * 64.0 * i / NREC) + b * $sin(2.0 * PI * 64.0 * i / NREC) + c;
      res += (rec[i] - fit) * (rec[i] - fit);
    end
    res = $sqrt(res / NREC);
    snr = 20.0 * $log10((amp / $sqrt(2.0)) / res);
    $display("tone amplitude %0.1f LSB (expected %0d), DC %0.2f, noise %0.2f LSB rms, SNR %0.1f dB",
             amp, 14 * 2048, c, res, snr);
    checks++;
    if (amp < 0.99 * 28672.0 || amp > 1.01 * 28672.0) failures++;
    checks++;
    if (snr < 50.0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 128 * (NREC + SETTLE + 10));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
