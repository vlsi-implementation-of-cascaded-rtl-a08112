// tb_halfband_decim2: checks both half-band decimators of the chain, the
// 11-tap default (first half-band filter) and the 15-tap one (second).
// The reference is a plain direct-form FIR over the full coefficient list,
// zeros included,
//   h1 = [3, 0, -25, 0, 150, 256, 150, 0, -25, 0, 3] / 2^9
//   h2 = [-5, 0, 49, 0, -245, 0, 1225, 2048, 1225, 0, -245, 0, 49, 0, -5] / 2^12
// evaluated for every second input (inputs 1, 3, 5, ... counted from 0),
// rounded half up and saturated to 16 bits. Inputs arrive with random gaps.
// Checked: each output value, the clip flag, that out_valid follows every
// second input by one cycle and never comes otherwise. Part of the input is
// a full-scale pattern with the signs of the taps, which must saturate.
module tb_halfband_decim2;
  localparam int NIN = 3000;

  logic        clk = 0, rst_n, in_valid;
  logic [15:0] in, out1, out2;
  logic        v1, v2, clip1, clip2;
  int          checks = 0, failures = 0, n_clip1 = 0, n_clip2 = 0, n_out = 0;
  int          xs [NIN];
  int          h1 [11] = '{3, 0, -25, 0, 150, 256, 150, 0, -25, 0, 3};
  int          h2 [15] = '{-5, 0, 49, 0, -245, 0, 1225, 2048, 1225, 0, -245, 0, 49, 0, -5};

  halfband_decim2 dut1 (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in(in),
                        .out(out1), .out_valid(v1), .clip(clip1));
  halfband_decim2 #(.NSIDE(4), .COEF('{1225, -245, 49, -5, 0, 0, 0, 0}), .SHIFT(12)) dut2 (
                        .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in(in),
                        .out(out2), .out_valid(v2), .clip(clip2));

  always #5 clk = ~clk;

  // reference output after input i; sets clipped
  function automatic int fir(int i, int h [], int shift, output bit clipped);
    longint acc = 0;
    for (int j = 0; j < h.size(); j++) if (i - j >= 0) acc += longint'(h[j]) * xs[i-j];
    acc = (acc + (64'sd1 <<< (shift - 1))) >>> shift;
    clipped = (acc > 32767 || acc < -32768);
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  initial begin
    for (int i = 0; i < NIN; i++) begin
      if (i >= 1000 && i < 1100) begin
        // sign pattern of h2 around the centre at full scale: output well above 1
        xs[i] = (((i / 2) % 2) == 0) ? 32767 : -32768;
      end else if (i >= 1500 && i < 1600) begin
        xs[i] = ((i % 4) < 2) ? 32767 : -32768;
      end else begin
        xs[i] = int'($urandom_range(0, 65535)) - 32768;
      end
    end
    // full-scale window with the signs of h1 ending at input 1209
    for (int j = 0; j < 11; j++) xs[1209 - j] = (h1[j] < 0) ? -32768 : 32767;
  end

  initial begin
    int  e;
    bit  c;
    rst_n = 0;
    in_valid = 0;
    in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NIN; i++) begin
      repeat ($urandom_range(0, 3)) begin
        @(posedge clk);
        #1;
        checks++;
        if (v1 || v2) failures++;
      end
      in = 16'(xs[i]);
      in_valid = 1;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (v1 != (i % 2 == 1)) failures++;
      checks++;
      if (v2 != (i % 2 == 1)) failures++;
      if (i % 2 == 1) begin
        n_out++;
        e = fir(i, h1, 9, c);
        checks++;
        if ($signed(out1) != 16'(e)) begin
          failures++;
          if (failures < 10) $display("hb1 i=%0d out %0d ref %0d", i, $signed(out1), e);
        end
        checks++;
        if (clip1 != c) failures++;
        if (c) n_clip1++;
        e = fir(i, h2, 12, c);
        checks++;
        if ($signed(out2) != 16'(e)) begin
          failures++;
          if (failures < 10) $display("hb2 i=%0d out %0d ref %0d", i, $signed(out2), e);
        end
        checks++;
        if (clip2 != c) failures++;
        if (c) n_clip2++;
      end
    end
    $display("outputs %0d, saturated: hb1 %0d hb2 %0d", n_out, n_clip1, n_clip2);
    checks++;
    if (n_clip1 == 0 || n_clip2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(NIN * 60 + 1000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
