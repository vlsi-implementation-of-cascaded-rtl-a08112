// tb_cic_decimation_system: end-to-end test of the whole decimator at its
// default size (5-stage CIC with R = 16, then three decimate-by-2 filters,
// 128:1 overall).
//
// Stimulus: a first-order error-feedback quantiser turns a sine of
// amplitude 14 at 3 kHz (6.144 MHz sample clock) into a 5-bit stream, as a
// multi-bit sigma-delta modulator would; a burst of full-scale 80 kHz square
// wave in the middle drives the droop-correction filter into saturation.
//
// Reference: integer models of each stage, written independently of the
// RTL (pipelined, truncated integrators with 25/22/20/18/16-bit wrap; 1 in
// 16 kept; 16-bit combs; the three FIRs as direct-form convolutions over
// their full tap lists with half-up rounding and saturation). Every
// cic_out sample and every pcm_out sample is compared with the model, and
// the strobes with their expected cycles: cic_valid once every 16 cycles,
// pcm_valid once every 128.
//
// The mechanisms of the design are counted and each must occur: CIC output
// samples, outputs of each decimate-by-2 filter, wrap-around of an
// integrator register, a carry crossing from one 4-bit MCLA group into the next in
// the first integrator's adder, truncation of a non-zero LSB field between
// integrators, and saturation in a post-CIC filter.
module tb_cic_decimation_system;
  localparam int NCYC = 128 * 400;
  localparam int NS = 5;
  localparam int WID [NS] = '{25, 22, 20, 18, 16};

  logic        clk = 0, rst_n;
  logic [4:0]  sd_in;
  logic [15:0] cic_out, pcm_out;
  logic        cic_valid, pcm_valid, pcm_clip;
  logic [2:0]  stage_clip;

  int     checks = 0, failures = 0;
  int     n_port_clip = 0, n_cic = 0, n_hb1 = 0, n_drp = 0, n_pcm = 0, n_wrap = 0, n_gcarry = 0, n_trunc = 0, n_clip = 0;
  int     last_pcm = -1, y_exp;
  bit     c_exp;
  longint acc [NS], acc_n [NS], ds, dly [NS], cv, nx;
  int     cnt;
  int     xs [NCYC];
  int     cic_seq [$], hb1_seq [$], drp_seq [$];
  int     exp_pcm [$];
  bit     exp_clip [$];
  int     h1 [11] = '{3, 0, -25, 0, 150, 256, 150, 0, -25, 0, 3};
  int     h2 [15] = '{-5, 0, 49, 0, -245, 0, 1225, 2048, 1225, 0, -245, 0, 49, 0, -5};
  int     hd [3]  = '{-1, 6, -1};

  cic_decimation_system dut (
    .clk(clk), .rst_n(rst_n), .sd_in(sd_in),
    .cic_out(cic_out), .cic_valid(cic_valid),
    .pcm_out(pcm_out), .pcm_valid(pcm_valid), .pcm_clip(pcm_clip),
    .stage_clip(stage_clip)
  );

  always #5 clk = ~clk;

  function automatic longint wrap(longint v, int w);
    return v & ((64'sd1 << w) - 1);
  endfunction

  function automatic int s16(longint v);
    v = wrap(v, 16);
    return int'((v >= 32768) ? v - 65536 : v);
  endfunction

  // FIR output over the last h.size() entries of seq, rounded and saturated
  function automatic int fir(int seq [$], int h [], int shift, output bit clipped);
    longint a = 0;
    int     i = seq.size() - 1;
    for (int j = 0; j < h.size(); j++) if (i - j >= 0) a += longint'(h[j]) * seq[i-j];
    a = (a + (64'sd1 <<< (shift - 1))) >>> shift;
    clipped = (a > 32767 || a < -32768);
    if (a > 32767) a = 32767;
    if (a < -32768) a = -32768;
    return int'(a);
  endfunction

  // model of the chain after the CIC for one new CIC sample
  task automatic post_cic(int v);
    bit c1, c2, c3;
    int y;
    cic_seq.push_back(v);
    if (cic_seq.size() % 2 == 0) begin
      y = fir(cic_seq, h1, 9, c1);
      hb1_seq.push_back(y);
      if (c1) n_clip++;
      if (hb1_seq.size() % 2 == 0) begin
        y = fir(hb1_seq, hd, 2, c2);
        drp_seq.push_back(y);
        if (c2) n_clip++;
        if (drp_seq.size() % 2 == 0) begin
          y = fir(drp_seq, h2, 12, c3);
          if (c3) n_clip++;
          exp_pcm.push_back(y);
          exp_clip.push_back(c3);
        end
      end
    end
  endtask

  initial begin
    real u, e;
    int  q;
    e = 0.0;
    for (int n = 0; n < NCYC; n++) begin
      if (n >= NCYC / 2 && n < NCYC / 2 + 128 * 40) begin
        q = ((n % 77) < 38) ? 15 : -16;        // about 80 kHz square
      end else begin
        u = 14.0 * $sin(2.0 * 3.14159265358979 * 3000.0 * n / 6.144e6);
        q = int'($floor(u - e + 0.5));
        if (q > 15) q = 15;
        if (q < -16) q = -16;
        e = real'(q) - (u - e);
      end
      xs[n] = q;
    end
  end

  initial begin
    rst_n = 0;
    sd_in = '0;
    for (int k = 0; k < NS; k++) begin acc[k] = 0; dly[k] = 0; end
    ds = 0;
    cnt = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < NCYC; n++) begin
      sd_in = 5'(xs[n]);
      @(posedge clk);
      #1;
      // model state after the edge that ends cycle n
      acc_n[0] = wrap(acc[0] + longint'(xs[n]), WID[0]);
      for (int k = 1; k < NS; k++) begin
        acc_n[k] = wrap(acc[k] + (acc[k-1] >> (WID[k-1] - WID[k])), WID[k]);
        if (acc[k] + (acc[k-1] >> (WID[k-1] - WID[k])) >= (64'sd1 << WID[k])) n_wrap++;
        if (wrap(acc[k-1], WID[k-1] - WID[k]) != 0) n_trunc++;
      end
      if (cnt == 15) begin
        cv = ds;
        for (int k = 0; k < NS; k++) begin
          nx = wrap(cv - dly[k], 16);
          dly[k] = cv;
          cv = nx;
        end
        ds = acc[NS-1];
      end
      acc = acc_n;
      if (dut.u_cic.g_int[0].u_int.u_add.g_group[2].c0) n_gcarry++;
      checks++;
      if (cic_valid != (cnt == 15)) failures++;
      if (cic_valid) begin
        cv = ds;
        for (int k = 0; k < NS; k++) cv = wrap(cv - dly[k], 16);
        checks++;
        if (longint'(cic_out) != cv) begin
          failures++;
          if (failures < 10) $display("cycle %0d: cic_out %h model %h", n, cic_out, cv);
        end
        n_cic++;
        post_cic(s16(cv));
      end
      if (dut.drp_valid && stage_clip[1]) n_port_clip++;
      if (dut.hb1_valid) n_hb1++;
      if (dut.drp_valid) n_drp++;
      if (pcm_valid) begin
        n_pcm++;
        if (last_pcm >= 0) begin
          checks++;
          if (n - last_pcm != 128) failures++;
        end
        last_pcm = n;
        checks++;
        if (exp_pcm.size() == 0) failures++;
        else begin
          y_exp = exp_pcm.pop_front();
          c_exp = exp_clip.pop_front();
          checks++;
          if ($signed(pcm_out) != 16'(y_exp)) begin
            failures++;
            if (failures < 10) $display("cycle %0d: pcm_out %0d model %0d", n, $signed(pcm_out), y_exp);
          end
          checks++;
          if (pcm_clip != c_exp) failures++;
        end
      end
      cnt = (cnt + 1) % 16;
    end
    $display("cic %0d hb1 %0d droop %0d pcm %0d wraps %0d group-carries %0d truncations %0d saturations %0d",
             n_cic, n_hb1, n_drp, n_pcm, n_wrap, n_gcarry, n_trunc, n_clip);
    checks++; if (n_cic == 0)    failures++;
    checks++; if (n_hb1 == 0)    failures++;
    checks++; if (n_drp == 0)    failures++;
    checks++; if (n_pcm == 0)    failures++;
    checks++; if (n_wrap == 0)   failures++;
    checks++; if (n_gcarry == 0) failures++;
    checks++; if (n_trunc == 0)  failures++;
    checks++; if (n_clip == 0)   failures++;
    checks++; if (n_port_clip == 0) failures++;
    // the CIC, half-band and droop stages together decimate by 128
    checks++; if (n_pcm < NCYC / 128 - 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #((NCYC + 200) * 10);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
