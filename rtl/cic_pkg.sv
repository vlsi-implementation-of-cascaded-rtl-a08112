// cic_pkg: numbers shared by the decimator.
//
// The decimator takes a 6.144 MHz stream from a sigma-delta modulator down to
// 48 kHz in four steps: a five-stage CIC filter decimating by 16, then a first
// half-band filter, a droop-correction filter and a second half-band filter,
// each decimating by 2 (overall ratio 128). The CIC order, differential delay,
// decimation factor and the truncated register widths of the integrators
// (25, 22, 20, 18, 16 bits) and combs (16 bits) are the published design
// figures. The 5-bit input word is derived here: it is the input width for
// which 5*log2(16) bits of growth fill exactly the 25-bit first integrator.
// The 16-bit word length after the CIC is this design's choice, carried over
// from the comb width.
package cic_pkg;

  localparam int unsigned CIC_N     = 5;   // number of integrator / comb stages
  localparam int unsigned CIC_R     = 16;  // decimation factor
  localparam int unsigned CIC_M     = 1;   // differential delay
  localparam int unsigned CIC_B_IN  = 5;   // input word (two's complement)
  localparam int unsigned CIC_B_MAX = 25;  // full-precision register width

  typedef int unsigned stage_widths_t [CIC_N];

  // Register width of integrator 1..5 after truncation of LSBs.
  localparam stage_widths_t CIC_INT_W = '{25, 22, 20, 18, 16};

  // Word length of the comb section, of the CIC output and of the
  // half-band / droop-correction filters that follow it.
  localparam int unsigned PCM_W = 16;

endpackage
