// tb_mcla: checks the modified carry look-ahead adder against integer
// addition. The 8-bit adder of the published drawing is checked
// exhaustively (all a, b, cin), and a 25-bit adder (the
// widest integrator) with random operands plus carry-chain corner cases
// (all-ones plus one, which carries through every group).
module tb_mcla;
  localparam int unsigned WD = 25;

  logic [7:0]    a8, b8, s8;
  logic          ci8, co8;
  logic [WD-1:0] a, b, s;
  logic          ci, co;
  int            checks = 0, failures = 0;

  mcla #(.W(8)) dut8 (.a(a8), .b(b8), .cin(ci8), .sum(s8), .cout(co8));
  mcla #(.W(WD)) dut  (.a(a),  .b(b),  .cin(ci),  .sum(s),  .cout(co));

  task automatic check_wide();
    longint unsigned ref_sum;
    #1;
    ref_sum = longint'(a) + longint'(b) + longint'(ci);
    checks++;
    if ({co, s} != ref_sum[WD:0]) begin
      failures++;
      if (failures < 10) $display("mismatch %h + %h + %0d: got %h", a, b, ci, {co, s});
    end
  endtask

  initial begin
    for (int v = 0; v < (1 << 17); v++) begin
      {a8, b8, ci8} = 17'(v);
      #1;
      checks++;
      if ({co8, s8} != 9'(int'(a8) + int'(b8) + int'(ci8))) failures++;
    end
    a = '1; b = '0; ci = 1'b1; check_wide();
    a = '1; b = WD'(1); ci = 1'b0; check_wide();
    a = '1; b = '1; ci = 1'b1; check_wide();
    a = '0; b = '0; ci = 1'b0; check_wide();
    for (int i = 0; i < 20000; i++) begin
      a  = WD'($urandom);
      b  = WD'($urandom);
      ci = 1'($urandom);
      check_wide();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
