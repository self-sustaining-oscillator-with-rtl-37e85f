// lowpass_filter: first-order IIR low-pass on the decimated interval series.
//
// This filter sets the final bandwidth of the frequency counter and is the
// knob that trades response speed against precision. It is a first-order
// Butterworth low-pass in bilinear-transform form,
//     y[n] = b0*(x[n] + x[n-1]) + (1 - 2*b0)*y[n-1]
//          = y[n-1] + b0*(x[n] + x[n-1] - 2*y[n-1]),
// which needs one multiplier. b0 = K/(1+K) with K = tan(pi*f_c/f_s); the
// coefficient is a run-time input (unsigned, COEF_W fraction bits, below
// 0.5), so the bandwidth can be changed without rebuilding. At
// f_s = 76.92 MHz / 8192 = 9.39 kHz, f_c = 200 Hz gives b0*2^18 = 16464.
// The product is rounded to nearest. The first sample after reset loads
// the state (y = x[n-1] = x) so the output starts without a transient.
// bypass = 1 passes x straight to y, giving the unfiltered path; the state
// keeps following x so that switching back is smooth.
//
// Interface: x and y are unsigned W-bit words in the same units.
// Timing: y and out_valid follow in_valid by one clock cycle.
// The filter type and the 200 Hz cut-off follow the paper; the filter form,
// number formats, start-up load and bypass are this design's choices.
module lowpass_filter #(
  parameter int unsigned W      = fc_pkg::DEC_W,
  parameter int unsigned COEF_W = fc_pkg::COEF_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [W-1:0]      x,
  input  logic [COEF_W-1:0] coef,
  input  logic              bypass,
  output logic              out_valid,
  output logic [W-1:0]      y
);
  localparam int unsigned D_W = W + 3;            // x + x1 - 2*y1, signed
  localparam int unsigned P_W = D_W + COEF_W + 1;

  logic              primed;
  logic [W-1:0]      x1;
  logic signed [D_W-1:0] diff;
  logic signed [P_W-1:0] prod, step;
  logic [W-1:0]      y_nx;

  assign diff = $signed(D_W'(x)) + $signed(D_W'(x1)) - $signed(D_W'({y, 1'b0}));
  assign prod = diff * $signed({1'b0, coef});
  assign step = (prod + (P_W'(1) <<< (COEF_W - 1))) >>> COEF_W;
  assign y_nx = W'($signed(P_W'(y)) + step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      primed    <= 1'b0;
      x1        <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x1     <= x;
        primed <= 1'b1;
        if (!primed || bypass) y <= x;
        else                   y <= y_nx;
      end
    end
  end
endmodule
