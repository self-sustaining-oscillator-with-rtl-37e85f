// sso_fc_top: digital part of a self-sustaining oscillator (SSO) resonance
// tracker with a frequency counter read-out.
//
// The resonator sits in a feedback loop: its amplified, band-pass filtered
// signal is squared by a comparator, each comparator edge fires a pulse of
// width T_w (pulse_width_gen), the pulse is delayed by T_d (pulse_delay) and,
// attenuated, kicks the resonator again, so the loop oscillates at the
// resonance frequency. The frequency is read outside that loop by
// freq_counter from the band-pass filter output. The resonator, amplifier,
// band-pass filter, comparator and attenuator are analog and are reached
// through ports: comp_in from the comparator, fc_in the squared band-pass
// output for the counter, drive_pulse to the attenuator.
//
// Timing: see the sub-blocks. drive_pulse follows a comparator edge after
// 3 + td + 1 clock cycles and lasts tw cycles; f_valid pulses every R
// cycles. The loop structure follows the paper; the port set is this
// design's choice.
module sso_fc_top #(
  parameter int unsigned F_CLK_HZ = fc_pkg::F_CLK_HZ,
  parameter int unsigned R        = fc_pkg::CIC_R,
  parameter int unsigned N        = fc_pkg::CIC_N,
  parameter int unsigned TW_W     = 16,
  parameter int unsigned MAX_TD   = 1024,
  localparam int unsigned TD_W    = $clog2(MAX_TD)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // frequency counter
  input  logic                                  fc_in,
  input  logic [fc_pkg::K_W-1:0]                k,
  input  logic [fc_pkg::COEF_W-1:0]             lpf_coef,
  input  logic                                  lpf_bypass,
  output logic                                  raw_valid,
  output logic [fc_pkg::TS_W-1:0]               raw_ivl,
  output logic                                  dec_valid,
  output logic [fc_pkg::DEC_W-1:0]              dec_ivl,
  output logic                                  f_valid,
  output logic [fc_pkg::F_W-1:0]                f,
  // oscillator drive
  input  logic                                  comp_in,
  input  logic [TW_W-1:0]                       tw,
  input  logic [TD_W-1:0]                       td,
  output logic                                  drive_pulse
);
  logic pulse_w;

  freq_counter #(.F_CLK_HZ(F_CLK_HZ), .R(R), .N(N)) u_fc (
    .clk(clk), .rst_n(rst_n), .sig_in(fc_in), .k(k),
    .lpf_coef(lpf_coef), .lpf_bypass(lpf_bypass),
    .raw_valid(raw_valid), .raw_ivl(raw_ivl),
    .dec_valid(dec_valid), .dec_ivl(dec_ivl),
    .f_valid(f_valid), .f(f));

  pulse_width_gen #(.TW_W(TW_W)) u_tw (
    .clk(clk), .rst_n(rst_n), .comp_in(comp_in), .tw(tw), .pulse(pulse_w));

  pulse_delay #(.MAX_TD(MAX_TD)) u_td (
    .clk(clk), .rst_n(rst_n), .din(pulse_w), .td(td), .dout(drive_pulse));
endmodule
