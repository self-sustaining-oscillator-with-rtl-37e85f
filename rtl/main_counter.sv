// main_counter: continuous reciprocal counter with interpolated time stamps.
//
// A free-running counter of internal clock cycles is never cleared between
// measurements. Each interpolator hit makes a time stamp
//     ts = cycle_count * 2^FINE_BITS - fine
// in units of T_CLK / 2^FINE_BITS, i.e. the clock cycle in which the edge was
// seen, corrected back to the true edge position. The block outputs the
// interval between consecutive time stamps, t_n - t_{n-1}; behind the
// divider that is t_n - t_{n-k}, the duration of k input periods. All
// arithmetic is modulo 2^TS_W, so counter wrap-around does not disturb the
// intervals as long as one interval is shorter than 2^(TS_W-FINE_BITS)
// clock cycles (0.44 s at 76.92 MHz for TS_W = 32).
//
// Timing: ivl_valid and ivl appear one cycle after hit. The first hit after
// reset only sets the reference time stamp and gives no interval.
// The continuous, interpolating reciprocal counter follows the paper; the
// time-stamp format and widths are this design's choices.
module main_counter #(
  parameter int unsigned FINE_BITS = fc_pkg::FINE_BITS,
  parameter int unsigned TS_W      = fc_pkg::TS_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 hit,
  input  logic [FINE_BITS-1:0] fine,
  output logic [TS_W-1:0]      ts,
  output logic                 ivl_valid,
  output logic [TS_W-1:0]      ivl
);
  localparam int unsigned C_W = TS_W - FINE_BITS;

  logic [C_W-1:0]  coarse;
  logic [TS_W-1:0] ts_now;
  logic            have_ref;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coarse <= '0;
    else        coarse <= coarse + C_W'(1);
  end

  assign ts_now = {coarse, FINE_BITS'(0)} - TS_W'(fine);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts        <= '0;
      have_ref  <= 1'b0;
      ivl_valid <= 1'b0;
      ivl       <= '0;
    end else begin
      ivl_valid <= 1'b0;
      if (hit) begin
        ts       <= ts_now;
        have_ref <= 1'b1;
        if (have_ref) begin
          ivl_valid <= 1'b1;
          ivl       <= ts_now - ts;
        end
      end
    end
  end
endmodule
