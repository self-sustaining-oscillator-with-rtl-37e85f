// fc_pkg: constants shared by the frequency-counter blocks.
//
// The counter runs from one internal clock of F_CLK_HZ = 76.92 MHz (the
// clock frequency used in the published measurements). Time is measured in
// units of T_CLK / 2^FINE_BITS; with FINE_BITS = 7 one unit is 101.6 ps,
// matching the ~100 ps time-stamp resolution of the interpolating counter.
// Interval words are TS_W bits wide; the samples that leave the CIC
// decimator carry FRAC extra fraction bits. The frequency output is in Hz
// with FRAC fraction bits. All widths other than the clock frequency, the
// decimation factor and the comb delay are this design's own choices.
package fc_pkg;
  localparam int unsigned F_CLK_HZ  = 76_920_000;
  localparam int unsigned FINE_BITS = 7;
  localparam int unsigned TS_W      = 32;
  localparam int unsigned K_W       = 16;
  localparam int unsigned FRAC      = 16;
  localparam int unsigned DEC_W     = TS_W + FRAC;
  localparam int unsigned F_W       = 48;
  localparam int unsigned COEF_W    = 18;
  // First-order Butterworth (bilinear) b0 for 200 Hz at f_CLK/8192 = 9389.6 Hz:
  // K = tan(pi*200/9389.6) = 0.06702, b0 = K/(1+K) = 0.06281, * 2^18.
  localparam int unsigned LPF_COEF_200HZ = 16464;
  localparam int unsigned CIC_R     = 8192;
  localparam int unsigned CIC_N     = 2;
endpackage
