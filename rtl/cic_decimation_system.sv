// cic_decimation_system: decimator from a sigma-delta modulator to 48 kHz.
//
// The whole chain runs from one clock at the modulator's output rate
// (6.144 MHz nominal) and takes one B_IN-bit modulator sample per cycle. It
// reduces the rate by 128 in four steps, as published:
//   cic_filter       R = 16   6.144 MHz -> 384 kHz   (5-stage pipelined CIC, MCLA adders)
//   halfband_decim2  R = 2    384 kHz   -> 192 kHz   (first half-band filter)
//   droop_decim2     R = 2    192 kHz   -> 96 kHz    (droop correction)
//   halfband_decim2  R = 2    96 kHz    -> 48 kHz    (second half-band filter)
// The lower rates are carried by valid strobes rather than divided clocks
// (this design's choice): cic_valid is high one cycle in 16, pcm_valid one
// cycle in 128. All words after the CIC are 16 bits. The modulator itself is
// outside this block; its output is sd_in. The filters after the CIC use
// short filters of this design's own (see their files), not the published
// ones. Each of those filters saturates instead of wrapping; stage_clip
// shows, per filter, whether its most recent output was saturated.
module cic_decimation_system
  import cic_pkg::*;
#(
  parameter int unsigned B_IN = CIC_B_IN,
  parameter int unsigned R    = CIC_R
) (
  input  logic              clk,        // modulator sample clock
  input  logic              rst_n,      // asynchronous, active low
  input  logic [B_IN-1:0]   sd_in,      // modulator output, two's complement
  output logic [PCM_W-1:0]  cic_out,    // CIC output (384 kHz)
  output logic              cic_valid,
  output logic [PCM_W-1:0]  pcm_out,    // decimated output (48 kHz)
  output logic              pcm_valid,
  output logic              pcm_clip,   // this pcm_out was saturated
  output logic [2:0]        stage_clip  // last output of {hb2, droop, hb1} saturated
);

  logic [PCM_W-1:0] hb1_out, drp_out;
  logic             hb1_valid, drp_valid;
  logic             hb1_clip, drp_clip, hb2_clip;  // per-filter saturation flags

  cic_filter #(.B_IN(B_IN), .R(R)) u_cic (
    .clk     (clk),
    .rst_n   (rst_n),
    .a_in    (sd_in),
    .s_out   (cic_out),
    .s_valid (cic_valid)
  );

  halfband_decim2 #(
    .DW    (PCM_W),
    .NSIDE (3),
    .COEF  ('{150, -25, 3, 0, 0, 0, 0, 0}),
    .SHIFT (9)
  ) u_hb1 (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (cic_valid),
    .in        (cic_out),
    .out       (hb1_out),
    .out_valid (hb1_valid),
    .clip      (hb1_clip)
  );

  droop_decim2 #(.DW(PCM_W)) u_droop (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (hb1_valid),
    .in        (hb1_out),
    .out       (drp_out),
    .out_valid (drp_valid),
    .clip      (drp_clip)
  );

  halfband_decim2 #(
    .DW    (PCM_W),
    .NSIDE (4),
    .COEF  ('{1225, -245, 49, -5, 0, 0, 0, 0}),
    .SHIFT (12)
  ) u_hb2 (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (drp_valid),
    .in        (drp_out),
    .out       (pcm_out),
    .out_valid (pcm_valid),
    .clip      (hb2_clip)
  );

  assign pcm_clip   = hb2_clip;
  assign stage_clip = {hb2_clip, drp_clip, hb1_clip};

endmodule
