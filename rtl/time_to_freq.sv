// time_to_freq: conversion of the filtered k-period duration into frequency.
//
// The last stage of the counter applies the reciprocal-counter formula
//     f = k / (t_n - t_{n-k})
// to the filtered interval. The interval arrives as an unsigned fixed-point
// number P in units of T_CLK / 2^FINE_BITS with IN_FRAC fraction bits, so
//     f [Hz] = k * F_CLK_HZ * 2^(FINE_BITS + IN_FRAC) / P,
// returned with OUT_FRAC fraction bits. The quotient is found by a
// restoring divider that retires one quotient bit per clock cycle, which is
// ample because a new interval arrives only every R clock cycles. Results
// that do not fit in OUT_W bits, and P = 0, give the all-ones value.
//
// Interface: in_valid starts a conversion with the period and k present in
// that cycle; a request while busy is ignored. Timing: out_valid pulses
// NUM_W + 1 cycles after in_valid (83 cycles at the default widths), with f
// held until the next result.
// The formula follows the paper; the divider and number formats are this
// design's choices.
module time_to_freq #(
  parameter int unsigned F_CLK_HZ  = fc_pkg::F_CLK_HZ,
  parameter int unsigned FINE_BITS = fc_pkg::FINE_BITS,
  parameter int unsigned IN_W      = fc_pkg::DEC_W,
  parameter int unsigned IN_FRAC   = fc_pkg::FRAC,
  parameter int unsigned OUT_W     = fc_pkg::F_W,
  parameter int unsigned OUT_FRAC  = fc_pkg::FRAC,
  parameter int unsigned K_W       = fc_pkg::K_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  period,
  input  logic [K_W-1:0]   k,
  output logic             busy,
  output logic             out_valid,
  output logic [OUT_W-1:0] f
);
  localparam int unsigned FC_W  = $clog2(F_CLK_HZ + 1);
  localparam int unsigned SH    = FINE_BITS + IN_FRAC + OUT_FRAC;
  localparam int unsigned NUM_W = K_W + FC_W + SH;
  localparam int unsigned CNT_W = $clog2(NUM_W + 1);

  logic [NUM_W-1:0] num, quo;
  logic [IN_W-1:0]  rem;
  logic [IN_W-1:0]  den;
  logic [CNT_W-1:0] cnt;
  logic [IN_W:0]    rem_sh;
  logic             ge;
  logic [K_W-1:0]   k_eff;

  assign k_eff  = (k == '0) ? K_W'(1) : k;
  assign rem_sh = {rem, num[NUM_W-1]};
  assign ge     = rem_sh >= {1'b0, den};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      f         <= '0;
      num       <= '0;
      quo       <= '0;
      rem       <= '0;
      den       <= '0;
      cnt       <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          busy <= 1'b1;
          num  <= NUM_W'(k_eff) * NUM_W'(F_CLK_HZ) << SH;
          den  <= period;
          rem  <= '0;
          quo  <= '0;
          cnt  <= CNT_W'(NUM_W);
        end
      end else if (cnt != '0) begin
        num <= num << 1;
        quo <= {quo[NUM_W-2:0], ge};
        rem <= ge ? IN_W'(rem_sh - {1'b0, den}) : IN_W'(rem_sh);
        cnt <= cnt - 1'b1;
      end else begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
        if (den == '0 || (quo >> OUT_W) != '0) f <= '1;
        else                                   f <= OUT_W'(quo);
      end
    end
  end
endmodule
