// freq_divider: input prescaler of the frequency counter.
//
// Produces one rising edge on div_out for every k rising edges of sig_in, so
// that the next stage time-stamps intervals of k input periods (the counter's
// gate time). A modulo-k counter is clocked directly by the input signal;
// div_out is high for the input period that starts when the counter returns
// to zero. For k = 1 (the recommended setting) the input is passed on
// unchanged; k = 0 is treated as 1.
//
// Interface: sig_in is the squared signal and the block's clock; rst_n is an
// asynchronous active-low reset; k may change at any time and takes effect at
// the next input edge. Timing: the rising edge of div_out follows the k-th
// input rising edge by one flip-flop clock-to-output delay.
//
// The divider and its place in front of the main counter follow the paper;
// the modulo counter, k = 0 handling and reset are this design's choices.
module freq_divider #(
  parameter int unsigned K_W = fc_pkg::K_W
) (
  input  logic           sig_in,
  input  logic           rst_n,
  input  logic [K_W-1:0] k,
  output logic           div_out
);
  logic [K_W-1:0] cnt;
  logic           pass;

  assign pass = (k <= K_W'(1));

  always_ff @(posedge sig_in or negedge rst_n) begin
    if (!rst_n)                  cnt <= '0;
    else if (pass || cnt >= k - K_W'(1)) cnt <= '0;
    else                         cnt <= cnt + K_W'(1);
  end

  // Register the divided output in the input clock domain so that it has a
  // single rising edge per k periods and no glitches.
  logic div_q;
  always_ff @(posedge sig_in or negedge rst_n) begin
    if (!rst_n) div_q <= 1'b0;
    else        div_q <= pass || cnt >= k - K_W'(1);
  end

  assign div_out = pass ? sig_in : div_q;
endmodule
