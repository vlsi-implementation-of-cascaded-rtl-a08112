// tb_cic_downsampler: checks the 1-in-R down-sampler at R = 16.
// The input is a cycle counter, so the kept value tells which cycle was
// kept. Checked: tick is high exactly on cycles 15, 31, ... after reset;
// valid follows one cycle later; y then equals the input of the tick cycle
// and holds until the next capture; the output rate is one sample per 16
// cycles.
module tb_cic_downsampler;
  localparam int unsigned R = 16;
  logic        clk = 0, rst_n;
  logic [15:0] x, y, y_hold;
  logic        tick, valid;
  int          checks = 0, failures = 0, n_valid = 0, last_valid = -1;

  cic_downsampler dut (.clk(clk), .rst_n(rst_n), .x(x), .y(y), .tick(tick), .valid(valid));

  always #5 clk = ~clk;

  initial begin
    rst_n = 0;
    x = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    y_hold = y;
    for (int n = 0; n < 40 * R; n++) begin
      x = 16'(n + 1000);
      #1;
      checks++;
      if (tick != ((n % R) == R - 1)) failures++;
      checks++;
      if (valid != (n > 0 && ((n - 1) % R) == R - 1)) failures++;
      if (valid) begin
        checks++;
        if (y != 16'(n - 1 + 1000)) failures++;
        if (last_valid >= 0) begin
          checks++;
          if (n - last_valid != R) failures++;
        end
        last_valid = n;
        n_valid++;
        y_hold = y;
      end else begin
        checks++;
        if (y != y_hold) failures++;
      end
      @(posedge clk);
      #1;
    end
    checks++;
    if (n_valid != 39) failures++;
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
