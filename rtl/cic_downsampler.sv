// cic_downsampler: the "down arrow R" between integrators and combs.
//
// A modulo-R counter runs at the input rate. In the cycle where it reads
// R-1, tick is high: the sample on x is captured into y at the end of that
// cycle, and the comb stages update on the same clock edge. valid is high for
// the one cycle right after the capture, when y and the comb outputs first
// show the new low-rate sample; y then holds for R cycles. Only the keeping
// of one sample in R is the published function; the counter, the tick/valid
// timing and the asynchronous active-low reset are this design's choices.
module cic_downsampler #(
  parameter int unsigned W = 16,       // sample width
  parameter int unsigned R = 16        // decimation factor
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] x,              // high-rate input
  output logic [W-1:0] y,              // low-rate output, held for R cycles
  output logic         tick,           // high in the cycle whose x is kept
  output logic         valid           // high the cycle after a capture
);

  localparam int unsigned CW = (R > 1) ? $clog2(R) : 1;

  logic [CW-1:0] cnt;

  assign tick = (cnt == CW'(R - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      y     <= '0;
      valid <= 1'b0;
    end else begin
      cnt   <= tick ? '0 : cnt + 1'b1;
      valid <= tick;
      if (tick) y <= x;
    end
  end

endmodule
