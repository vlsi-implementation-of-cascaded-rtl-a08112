// cic_integrator: one pipelined, truncated integrator stage 1/(1 - z^-1).
//
// The stage input arrives MSB-aligned on IN_W bits. The stage keeps only its
// top W bits (W <= IN_W): the IN_W - W least significant bits are dropped,
// which is the truncation that lets later stages use shorter registers while
// every stage stays aligned to the same MSB. The dropped input bits are
// left unconnected on purpose (a lint tool reports them as unused). The
// accumulator adds the truncated input to its own value with a modified
// carry look-ahead adder (mcla) and wraps modulo 2**W; wrap-around is
// harmless in a CIC filter as long as the final output word holds the
// output range.
//
// Pipelined form: the stage output is taken after the accumulator register,
// so y[n+1] = y[n] + x[n]. Each stage therefore adds one cycle of latency and
// the longest combinational path is one adder, not a chain of them; the
// accumulator register is the pipeline register, so no extra flip-flops are
// added. Reset (asynchronous, active low) clears the accumulator; the reset
// style is this design's choice. The stage runs every clock cycle (the
// input sample rate).
module cic_integrator #(
  parameter int unsigned IN_W = 25,    // width of the incoming word
  parameter int unsigned W    = 25     // register width of this stage
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [IN_W-1:0] x,           // previous stage output (two's complement)
  output logic [W-1:0]  y              // accumulator (two's complement)
);

  if (W > IN_W) begin : g_bad_width
    $error("cic_integrator: W must not exceed IN_W");
  end

  logic [W-1:0] xt;                    // input with its LSBs truncated
  logic [W-1:0] acc_next;
  logic         unused_cout;

  assign xt = x[IN_W-1 -: W];

  mcla #(.W(W)) u_add (
    .a    (y),
    .b    (xt),
    .cin  (1'b0),
    .sum  (acc_next),
    .cout (unused_cout)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= '0;
    else        y <= acc_next;
  end

endmodule
