// tdc_interpolator: BEHAVIOURAL MODEL of the time interpolator of the main
// counter (not synthesizable; a real one is a process-specific delay-line or
// analog time-to-digital converter).
//
// The interpolator resolves where, inside one period of the internal clock,
// a rising edge of edge_in fell. On the first rising clk edge after a rising
// edge of edge_in, hit is high for one cycle and fine holds the time from the
// input edge to that clock edge, floor-quantised to T_CLK / 2^FINE_BITS
// (saturated at 2^FINE_BITS - 1). The model measures the clock period from
// the last two clock edges, so it needs no period parameter; hits start after
// the second clock edge following reset. With FINE_BITS = 7 and the 76.92 MHz
// clock one step is 101.6 ps, close to the 100 ps resolution the counter is
// specified for. If several input edges fall into one clock cycle only the
// last is reported.
//
// Interface: clk, rst_n (active low), edge_in (asynchronous); outputs hit and
// fine are registered on clk. The output convention is this design's choice.
// The edge process records its time stamp with blocking assignments on
// purpose: it is simulation bookkeeping, not a register, and each variable
// has a single writer.
module tdc_interpolator #(
  parameter int unsigned FINE_BITS = fc_pkg::FINE_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 edge_in,
  output logic                 hit,
  output logic [FINE_BITS-1:0] fine
);
  realtime     t_edge;
  realtime     t_clk_prev;
  int unsigned n_edges;      // written only by the edge process
  int unsigned n_seen;       // written only by the clock process
  int unsigned n_clk;

  initial begin
    t_edge  = 0.0;
    n_edges = 0;
  end

  always @(posedge edge_in) begin
    t_edge  = $realtime;
    n_edges = n_edges + 1;
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit        <= 1'b0;
      fine       <= '0;
      n_seen     <= n_edges;
      n_clk      <= 0;
      t_clk_prev <= $realtime;
    end else begin
      realtime period, lag, steps;
      period = $realtime - t_clk_prev;
      lag    = $realtime - t_edge;
      t_clk_prev <= $realtime;
      if (n_clk < 2) n_clk <= n_clk + 1;
      hit <= 1'b0;
      if (n_edges != n_seen) begin
        n_seen <= n_edges;
        if (n_clk >= 2 && period > 0.0) begin
          steps = lag / period * real'(2 ** FINE_BITS);
          hit   <= 1'b1;
          if (steps >= real'(2 ** FINE_BITS - 1)) fine <= '1;
          else if (steps <= 0.0)                  fine <= '0;
          else                                    fine <= FINE_BITS'(int'($floor(steps)));
        end
      end
    end
  end
endmodule
