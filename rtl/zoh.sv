// zoh: zero-order hold onto the internal clock grid.
//
// The main counter delivers one interval per k input periods, i.e. at a rate
// set by the input frequency. The zero-order hold turns this into a sample
// stream at the full clock rate by repeating the latest interval in every
// clock cycle until the next one arrives; the CIC decimator that follows
// removes the steps this leaves. The sampling instants of the counter are
// already aligned to clock edges, so no resampling error is introduced.
//
// Timing: out_data takes a new value one cycle after in_valid. out_valid goes
// high with the first sample after reset and stays high. The hold itself
// follows the paper; the one-cycle register and out_valid are this design's
// choices.
module zoh #(
  parameter int unsigned W = fc_pkg::TS_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_valid) begin
      out_valid <= 1'b1;
      out_data  <= in_data;
    end
  end
endmodule
