// droop_decim2: CIC droop-correction filter that decimates by 2.
//
// The five-stage CIC filter attenuates the upper pass band (its response
// follows sinc^5). This filter lifts it back with the shortest symmetric FIR
// that can: three taps [C_SIDE, C_MID, C_SIDE] / 2**SHIFT, whose response
// 1 + 2a(1 - cos w) (a = -C_SIDE / 2**SHIFT) rises from 1 at DC. The default
// [-1, 6, -1] / 4 (a = 1/4) gives +0.23 dB at 20 kHz of the 192 kHz input
// rate, against the CIC's -0.19 dB there. As it decimates by 2 it computes an
// output only for every second input. Only the role (droop correction with
// decimation by 2 between the two half-band filters) is the published
// design; the length, coefficients and word lengths are this design's choice
// and much shorter than the published filter.
//
// Timing: as halfband_decim2. Every second valid input gives a rounded,
// saturated output registered in the following cycle with out_valid high
// for one cycle; clip flags a saturated output. Asynchronous active-low reset.
module droop_decim2 #(
  parameter int unsigned DW     = 16,   // data width
  parameter int          C_SIDE = -1,   // outer taps
  parameter int          C_MID  = 6,    // centre tap
  parameter int unsigned SHIFT  = 2     // coefficient scale 2**SHIFT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [DW-1:0] in,             // two's complement
  output logic [DW-1:0] out,            // two's complement
  output logic          out_valid,
  output logic          clip            // out was saturated
);

  localparam int unsigned AW = DW + SHIFT + 8;
  // output range of DW-bit two's complement, at accumulator width
  localparam logic signed [AW-1:0] MAXV = (AW'(1) <<< (DW - 1)) - AW'(1);
  localparam logic signed [AW-1:0] MINV = -(AW'(1) <<< (DW - 1));

  logic signed [DW-1:0] d1, d2;         // previous two inputs
  logic                 phase;
  logic signed [AW-1:0] acc, rounded;
  logic signed [DW-1:0] sat_val;
  logic                 sat_hit;

  always_comb begin
    acc = AW'(C_MID) * AW'(d1)
        + AW'(C_SIDE) * (AW'($signed(in)) + AW'(d2));
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
      d1        <= '0;
      d2        <= '0;
      phase     <= 1'b0;
      out       <= '0;
      out_valid <= 1'b0;
      clip      <= 1'b0;
    end else begin
      out_valid <= in_valid && phase;
      if (in_valid) begin
        d1    <= $signed(in);
        d2    <= d1;
        phase <= ~phase;
        if (phase) begin
          out  <= sat_val;
          clip <= sat_hit;
        end
      end
    end
  end

endmodule
