// halfband_decim2: half-band low-pass FIR that decimates by 2.
//
// A half-band filter has odd length 4*NSIDE - 1, is symmetric, has a centre
// tap of exactly 1/2 and every other tap zero. Only the NSIDE distinct
// non-zero side taps (at offsets +-1, +-3, ... from the centre) need a
// multiplier, and the symmetric pairs are added before they are multiplied,
// so the filter costs NSIDE constant multiplications per output; the centre
// tap is a shift. Because it decimates by 2, it computes an output only for
// every second input sample.
//
// Coefficients are integers scaled by 2**SHIFT (centre tap 2**(SHIFT-1)),
// given in the first NSIDE entries of COEF (at most 8).
// The default is the 11-tap maximally flat half-band
//   h = [3, 0, -25, 0, 150, 256, 150, 0, -25, 0, 3] / 512
// used as the first half-band filter; the second half-band filter uses the
// 15-tap one [-5, 0, 49, 0, -245, 0, 1225, 2048, ...] / 4096. Only the role of
// the filters (half-band, decimate by 2 after the CIC filter) is the published
// design; their lengths, coefficients and word lengths are this design's
// choice and are far shorter than the filters whose responses were
// published (stop-band near -120 dB).
//
// Timing: a new input is taken in every cycle with in_valid high. On every
// second one the sum over the window that ends with that input is rounded
// (half LSB added), shifted right by SHIFT, saturated to DW bits and
// registered: out_valid is high for one cycle, the cycle after that input,
// and clip says whether that output saturated. Asynchronous active-low
// reset clears the delay line and the phase.
module halfband_decim2 #(
  parameter int unsigned DW    = 16,               // data width
  parameter int unsigned NSIDE = 3,                // distinct non-zero side taps
  parameter int          COEF [8] = '{150, -25, 3, 0, 0, 0, 0, 0},  // taps at +-1, +-3, ...; first NSIDE used
  parameter int unsigned SHIFT = 9                 // coefficient scale 2**SHIFT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [DW-1:0] in,                        // two's complement
  output logic [DW-1:0] out,                       // two's complement
  output logic          out_valid,
  output logic          clip                       // out was saturated
);

  localparam int unsigned NT = 4 * NSIDE - 1;      // filter length

  if (NSIDE < 1 || NSIDE > 8) begin : g_bad_nside
    $error("halfband_decim2: NSIDE must be 1..8");
  end
  localparam int unsigned CI = 2 * NSIDE - 1;      // centre index in the window
  localparam int unsigned AW = DW + SHIFT + 8;     // accumulator width
  // output range of DW-bit two's complement, at accumulator width
  localparam logic signed [AW-1:0] MAXV = (AW'(1) <<< (DW - 1)) - AW'(1);
  localparam logic signed [AW-1:0] MINV = -(AW'(1) <<< (DW - 1));

  logic signed [DW-1:0] dly [NT-1];                // dly[0] is the previous input
  logic signed [DW-1:0] win [NT];                  // win[0] is the current input
  logic                 phase;                     // 1: this input completes a pair
  logic signed [AW-1:0] acc, pair, rounded;
  logic signed [DW-1:0] sat_val;
  logic                 sat_hit;

  always_comb begin
    win[0] = $signed(in);
    for (int i = 1; i < int'(NT); i++) win[i] = dly[i-1];
  end

  always_comb begin
    acc = AW'(win[CI]) <<< (SHIFT - 1);
    for (int k = 0; k < int'(NSIDE); k++) begin
      pair = AW'(win[CI - (2*k + 1)]) + AW'(win[CI + (2*k + 1)]);
      acc  = acc + AW'(COEF[k]) * pair;
    end
    rounded = (acc + (AW'(1) <<< (SHIFT - 1))) >>> SHIFT;
    sat_hit = 1'b0;
    sat_val = rounded[DW-1:0];
    if (rounded > MAXV) begin
      sat_val = {1'b0, {(DW-1){1'b1}}};
      sat_hit = 1'b1;
    end else if (rounded < MINV) begin
      sat_val = {1'b1, {(DW-1){1'b0}}};
      sat_hit = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NT) - 1; i++) dly[i] <= '0;
      phase     <= 1'b0;
      out       <= '0;
      out_valid <= 1'b0;
      clip      <= 1'b0;
    end else begin
      out_valid <= in_valid && phase;
      if (in_valid) begin
        dly[0] <= win[0];
        for (int i = 1; i < int'(NT) - 1; i++) dly[i] <= dly[i-1];
        phase <= ~phase;
        if (phase) begin
          out  <= sat_val;
          clip <= sat_hit;
        end
      end
    end
  end

endmodule
