// cic_comb: one comb stage 1 - z^-M of the low-rate section.
//
// out = in - in delayed by M low-rate samples. The delay line is M registers
// that shift when en is high, once per low-rate sample; en is the
// down-sampler's tick, so the delay line takes the current input at the same
// edge that the down-sampler loads the next sample. The subtraction is
// combinational and wraps modulo 2**W. As published, the comb section is not
// pipelined (it runs R times slower than the integrators, so it is not on the
// critical path), so the five comb subtractors form one combinational chain.
// The registers are cleared by the asynchronous active-low reset (this
// design's choice).
module cic_comb #(
  parameter int unsigned W = 16,       // word width
  parameter int unsigned M = 1         // differential delay
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,             // one pulse per low-rate sample
  input  logic [W-1:0] in,
  output logic [W-1:0] out
);

  logic [W-1:0] dly [M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(M); i++) dly[i] <= '0;
    end else if (en) begin
      dly[0] <= in;
      for (int i = 1; i < int'(M); i++) dly[i] <= dly[i-1];
    end
  end

  assign out = in - dly[M-1];

endmodule
