// pulse_width_gen: drive-pulse generator of the self-sustaining oscillator.
//
// In the self-sustaining oscillator the resonator is not driven by a
// continuous sine but kicked by one narrow pulse per oscillation period. This
// block makes that pulse: each rising edge of the comparator output (the
// squared, band-pass filtered resonator signal) starts a pulse of tw clock
// cycles. The comparator output is asynchronous and passes a two-flop
// synchroniser first. An edge that arrives while a pulse is still running
// restarts it. tw = 0 gives no pulse.
//
// Timing: the pulse starts 3 clock cycles after the comparator edge (two
// synchroniser stages and the output register) and lasts tw cycles.
// The pulse of width T_w triggered by the comparator follows the paper; the
// rising-edge trigger, the synchroniser, the retrigger rule and the clock
// resolution of T_w are this design's choices. The paper adjusts T_w (and
// T_d) automatically; that control loop is not described and not included,
// tw is an input.
module pulse_width_gen #(
  parameter int unsigned TW_W = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            comp_in,
  input  logic [TW_W-1:0] tw,
  output logic            pulse
);
  logic [2:0]      sync;     // [0],[1]: synchroniser, [2]: previous value
  logic            rise;
  logic [TW_W-1:0] remain;

  assign rise = sync[1] & ~sync[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[1:0], comp_in};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain <= '0;
      pulse  <= 1'b0;
    end else if (rise) begin
      remain <= (tw == '0) ? '0 : tw - 1'b1;
      pulse  <= (tw != '0);
    end else if (remain != '0) begin
      remain <= remain - 1'b1;
      pulse  <= 1'b1;
    end else begin
      pulse  <= 1'b0;
    end
  end
endmodule
