// tb_droop_decim2: checks the droop-correction decimator against a
// direct-form FIR with taps [-1, 6, -1] / 4 evaluated for every second
// input (inputs 1, 3, 5, ... counted from 0), rounded half up and saturated
// to 16 bits. Inputs arrive with random gaps. Checked: output values, the
// clip flag, out_valid one cycle after every second input and never
// otherwise, and that a full-scale alternating input saturates. A slow
// ramp checks unity gain at low frequency.
module tb_droop_decim2;
  localparam int NIN = 3000;

  logic        clk = 0, rst_n, in_valid;
  logic [15:0] in, out;
  logic        v, clip;
  int          checks = 0, failures = 0, n_clip = 0, n_out = 0;
  int          xs [NIN];
  int          h [3] = '{-1, 6, -1};

  droop_decim2 dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in(in),
                    .out(out), .out_valid(v), .clip(clip));

  always #5 clk = ~clk;

  function automatic int fir(int i, output bit clipped);
    longint acc = 0;
    for (int j = 0; j < 3; j++) if (i - j >= 0) acc += longint'(h[j]) * xs[i-j];
    acc = (acc + 2) >>> 2;
    clipped = (acc > 32767 || acc < -32768);
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  initial begin
    for (int i = 0; i < NIN; i++) begin
      if (i >= 1000 && i < 1100)      xs[i] = (i % 2 == 0) ? 32767 : -32768;
      else if (i >= 2000 && i < 2400) xs[i] = (i - 2000) * 10;
      else                            xs[i] = int'($urandom_range(0, 65535)) - 32768;
    end
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
        if (v) failures++;
      end
      in = 16'(xs[i]);
      in_valid = 1;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (v != (i % 2 == 1)) failures++;
      if (i % 2 == 1) begin
        n_out++;
        e = fir(i, c);
        checks++;
        if ($signed(out) != 16'(e)) begin
          failures++;
          if (failures < 10) $display("i=%0d out %0d ref %0d", i, $signed(out), e);
        end
        checks++;
        if (clip != c) failures++;
        if (c) n_clip++;
        if (i >= 2010 && i < 2400) begin
          // on a ramp the symmetric filter returns the centre sample
          checks++;
          if ($signed(out) != 16'(xs[i-1])) failures++;
        end
      end
    end
    $display("outputs %0d, saturated %0d", n_out, n_clip);
    checks++;
    if (n_clip == 0) failures++;
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
