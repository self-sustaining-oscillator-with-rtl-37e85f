// pulse_delay: programmable delay T_d of the self-sustaining oscillator.
//
// The delay sets the phase at which the drive pulse reaches the resonator
// and so the oscillation frequency of the loop. The pulse train is written
// into a circular buffer of MAX_TD one-bit entries, one per clock cycle, and
// read back td entries behind the write pointer, so the delay is exact to
// one clock cycle for any pattern of pulses, including several in flight.
// Until td+1 cycles have been written after reset the output is 0 (the
// buffer is never cleared, only its fill level is tracked).
//
// Timing: dout(t) = din(t - td - 1), td in 0 .. MAX_TD-1 clock cycles. td
// may change at any time; the output then jumps to the new tap.
// The delay element follows the paper; its buffer structure, range and
// reset behaviour are this design's choices.
module pulse_delay #(
  parameter int unsigned MAX_TD = 1024,
  localparam int unsigned A_W   = $clog2(MAX_TD)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           din,
  input  logic [A_W-1:0] td,
  output logic           dout
);
  logic           mem [MAX_TD];
  logic [A_W-1:0] wptr, rptr;
  logic [A_W:0]   fill;          // number of entries written, saturating

  assign rptr = wptr - td;

  always_ff @(posedge clk) begin
    mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      fill <= '0;
      dout <= 1'b0;
    end else begin
      wptr <= wptr + 1'b1;
      if (fill != (A_W+1)'(MAX_TD)) fill <= fill + 1'b1;
      // entry rptr was written td cycles ago (td = 0: in this cycle, not yet)
      if (td == '0)                          dout <= din;
      else if (fill >= (A_W+1)'(td))         dout <= mem[rptr];
      else                                   dout <= 1'b0;
    end
  end
endmodule
