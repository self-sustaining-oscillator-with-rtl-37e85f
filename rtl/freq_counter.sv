// freq_counter: frequency counter with fixed-rate output for resonance
// frequency tracking.
//
// A reciprocal counter measures the time of every k-th input period and
// reports frequency as k divided by that time. Its samples come at a rate
// set by the input itself, and taking the reciprocal before filtering turns
// high-frequency timing noise into low-frequency frequency noise
// (intermodulation). This counter therefore filters the measured durations
// first and converts to frequency last, at a fixed rate:
//
//   sig_in -> freq_divider (k) -> tdc_interpolator + main_counter
//          -> zoh (clock-rate samples) -> cic_decimator (/R, 2nd order)
//          -> lowpass_filter (first-order IIR) -> time_to_freq -> f
//
// The main counter never stops; its interval output (raw_ivl, units
// T_CLK/2^FINE_BITS) is the classic reciprocal-counter result. The zero-order
// hold repeats each interval on every clock so the CIC decimator sees a
// regular stream and produces its mean every R cycles (dec_ivl, FRAC
// fraction bits), independent of the input frequency. The low-pass filter
// then sets the tracking bandwidth and the last stage computes
// f = k * F_CLK_HZ * 2^FINE_BITS / interval, in Hz with FRAC fraction bits.
//
// Interface: one clock clk at F_CLK_HZ; sig_in is the squared resonator
// signal (asynchronous); k, lpf_coef and lpf_bypass are run-time settings.
// Timing: f_valid pulses once per R clock cycles (9.39 kHz at the defaults),
// starting 2N decimated periods after the first interval; the time-to-
// frequency stage adds 83 cycles of latency.
// The absolute time stamp of the main counter is not needed downstream and
// is left unconnected.
// The chain of blocks, R, N and f_CLK follow the paper; the word widths and
// handshakes are this design's choices.
module freq_counter #(
  parameter int unsigned F_CLK_HZ  = fc_pkg::F_CLK_HZ,
  parameter int unsigned R         = fc_pkg::CIC_R,
  parameter int unsigned N         = fc_pkg::CIC_N,
  parameter int unsigned FINE_BITS = fc_pkg::FINE_BITS,
  parameter int unsigned TS_W      = fc_pkg::TS_W,
  parameter int unsigned K_W       = fc_pkg::K_W,
  parameter int unsigned FRAC      = fc_pkg::FRAC,
  parameter int unsigned COEF_W    = fc_pkg::COEF_W,
  parameter int unsigned F_W       = fc_pkg::F_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sig_in,
  input  logic [K_W-1:0]       k,
  input  logic [COEF_W-1:0]    lpf_coef,
  input  logic                 lpf_bypass,
  output logic                 raw_valid,
  output logic [TS_W-1:0]      raw_ivl,
  output logic                 dec_valid,
  output logic [TS_W+FRAC-1:0] dec_ivl,
  output logic                 f_valid,
  output logic [F_W-1:0]       f
);
  localparam int unsigned DW = TS_W + FRAC;

  logic                 div_sig;
  logic                 hit;
  logic [FINE_BITS-1:0] fine;
  logic                 zoh_valid;
  logic [TS_W-1:0]      zoh_data;
  logic                 lpf_valid;
  logic [DW-1:0]        lpf_ivl;
  logic                 t2f_busy;

  freq_divider #(.K_W(K_W)) u_div (
    .sig_in(sig_in), .rst_n(rst_n), .k(k), .div_out(div_sig));

  tdc_interpolator #(.FINE_BITS(FINE_BITS)) u_tdc (
    .clk(clk), .rst_n(rst_n), .edge_in(div_sig), .hit(hit), .fine(fine));

  main_counter #(.FINE_BITS(FINE_BITS), .TS_W(TS_W)) u_cnt (
    .clk(clk), .rst_n(rst_n), .hit(hit), .fine(fine),
    .ts(), .ivl_valid(raw_valid), .ivl(raw_ivl));

  zoh #(.W(TS_W)) u_zoh (
    .clk(clk), .rst_n(rst_n), .in_valid(raw_valid), .in_data(raw_ivl),
    .out_valid(zoh_valid), .out_data(zoh_data));

  cic_decimator #(.R(R), .N(N), .IN_W(TS_W), .OUT_FRAC(FRAC)) u_cic (
    .clk(clk), .rst_n(rst_n), .in_valid(zoh_valid), .x(zoh_data),
    .out_valid(dec_valid), .y(dec_ivl));

  lowpass_filter #(.W(DW), .COEF_W(COEF_W)) u_lpf (
    .clk(clk), .rst_n(rst_n), .in_valid(dec_valid), .x(dec_ivl),
    .coef(lpf_coef), .bypass(lpf_bypass), .out_valid(lpf_valid), .y(lpf_ivl));

  time_to_freq #(.F_CLK_HZ(F_CLK_HZ), .FINE_BITS(FINE_BITS), .IN_W(DW),
                 .IN_FRAC(FRAC), .OUT_W(F_W), .OUT_FRAC(FRAC), .K_W(K_W)) u_t2f (
    .clk(clk), .rst_n(rst_n), .in_valid(lpf_valid), .period(lpf_ivl), .k(k),
    .busy(t2f_busy), .out_valid(f_valid), .f(f));

  // A new filtered interval must never arrive while the divider is busy.
  assert property (@(posedge clk) disable iff (!rst_n) lpf_valid |-> !t2f_busy)
    else $error("freq_counter: interval dropped, time_to_freq still busy");
endmodule
