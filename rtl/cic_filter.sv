// cic_filter: five-stage truncated, pipelined CIC decimation filter.
//
// H(z) = ((1 - z^-RM) / (1 - z^-1))^N with N = 5, R = 16, M = 1 by default.
// The input word (B_IN bits) is sign-extended to the full-precision width
// B_MAX = N*log2(RM) + B_IN (25 bits), which holds the largest output
// (RM)^N times the largest input, so nothing overflows. The N integrators run
// at the input rate; integrator k keeps INT_W[k] bits, dropping LSBs of the
// previous stage (25, 22, 20, 18, 16 bits), so every stage stays aligned to
// bit 24 of the full-precision word. The integrators are pipelined: each
// stage output is its accumulator register and each adder is an MCLA. The
// down-sampler keeps one sample in R; the N combs run at the low rate on
// INT_W[N-1] bits (16) and form one combinational subtractor chain.
//
// Output: s_out is the top 16 bits of the 25-bit full-precision result (the
// filter gain (RM)^N = 2^20 divided by 2^9), up to truncation error. It
// changes once every R cycles; s_valid is high for the first cycle of each
// new output. Latency: an input sample first reaches the last integrator
// register N cycles after it is applied; one sample in R of that register
// is then kept.
//
// The stage widths, N, M, R and the pipelining of integrators only follow the
// published design; the input width is derived from the 25-bit first stage,
// and the strobe timing and reset are this design's choices.
module cic_filter
  import cic_pkg::*;
#(
  parameter int unsigned   N     = CIC_N,
  parameter int unsigned   R     = CIC_R,
  parameter int unsigned   M     = CIC_M,
  parameter int unsigned   B_IN  = CIC_B_IN,
  parameter int unsigned   B_MAX = CIC_B_MAX,
  parameter int unsigned   INT_W [N] = CIC_INT_W,
  localparam int unsigned  OUT_W = INT_W[N-1]
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [B_IN-1:0]  a_in,       // one sample per clock, two's complement
  output logic [OUT_W-1:0] s_out,      // decimated output, two's complement
  output logic             s_valid     // first cycle of a new s_out
);

  // Integrator outputs, MSB-aligned in B_MAX-bit words (unused LSBs zero).
  logic [B_MAX-1:0] ival [N+1];

  assign ival[0] = B_MAX'($signed(a_in));

  for (genvar k = 0; k < N; k++) begin : g_int
    localparam int unsigned IW = (k == 0) ? B_MAX : INT_W[k-1];
    logic [INT_W[k]-1:0] y;

    cic_integrator #(.IN_W(IW), .W(INT_W[k])) u_int (
      .clk   (clk),
      .rst_n (rst_n),
      .x     (ival[k][B_MAX-1 -: IW]),
      .y     (y)
    );

    if (INT_W[k] == B_MAX) begin : g_full
      assign ival[k+1] = y;
    end else begin : g_trunc
      assign ival[k+1] = {y, {(B_MAX - INT_W[k]){1'b0}}};
    end
  end

  // Down-sampler.
  logic [OUT_W-1:0] ds_y;
  logic             tick;

  cic_downsampler #(.W(OUT_W), .R(R)) u_ds (
    .clk   (clk),
    .rst_n (rst_n),
    .x     (ival[N][B_MAX-1 -: OUT_W]),
    .y     (ds_y),
    .tick  (tick),
    .valid (s_valid)
  );

  // Comb chain.
  logic [OUT_W-1:0] cval [N+1];

  assign cval[0] = ds_y;

  for (genvar k = 0; k < N; k++) begin : g_comb
    cic_comb #(.W(OUT_W), .M(M)) u_comb (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (tick),
      .in    (cval[k]),
      .out   (cval[k+1])
    );
  end

  assign s_out = cval[N];

endmodule
