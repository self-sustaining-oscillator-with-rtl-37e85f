// cic_decimator: second-order cascaded integrator-comb decimator.
//
// Converts the clock-rate output of the zero-order hold to the fixed rate
// f_CLK / R while low-pass filtering it. Two integrators run at the input
// rate (y = y + x), every R-th integrator value is passed to two comb
// sections running at the output rate (y = x - x delayed by N output
// samples). The transfer function is ((1 - z^-RN) / (1 - z^-1))^2 with DC gain
// (R*N)^2. Registers are IN_W + 2*log2(R*N) bits wide (Hogenauer bit growth);
// the integrators may wrap, two's-complement arithmetic makes the comb output
// exact regardless. The output is divided by (R*N)^2 with OUT_FRAC fraction
// bits kept, so y is the weighted mean of the input (R*N must be a power of
// two). With R = 8192 and a 76.92 MHz clock the output rate is 9.39 kHz.
//
// Interface: in_valid is the input sample strobe (the clock enable of the
// integrators and of the decimation phase counter). out_valid pulses one
// cycle after every R-th input, except for the first 2N-1 decimated samples,
// which come before the filter window has filled.
// The order, R = 2^13 and N = 2 follow the paper; widths, output scaling and
// the start-up suppression are this design's choices.
module cic_decimator #(
  parameter int unsigned R        = fc_pkg::CIC_R,
  parameter int unsigned N        = fc_pkg::CIC_N,
  parameter int unsigned IN_W     = fc_pkg::TS_W,
  parameter int unsigned OUT_FRAC = fc_pkg::FRAC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [IN_W-1:0]          x,
  output logic                     out_valid,
  output logic [IN_W+OUT_FRAC-1:0] y
);
  localparam int unsigned ORDER  = 2;
  localparam int unsigned GROWTH = ORDER * $clog2(R * N);
  localparam int unsigned W      = IN_W + GROWTH;
  localparam int unsigned SHIFT  = GROWTH - OUT_FRAC;
  localparam int unsigned PH_W   = (R > 1) ? $clog2(R) : 1;
  localparam int unsigned SKIP   = ORDER * N - 1;

  logic [W-1:0]    integ1, integ2;
  logic [W-1:0]    integ1_nx, integ2_nx;
  logic [PH_W-1:0] phase;
  logic            dec_strobe;
  // comb delay lines, N output samples deep
  logic [W-1:0]    c1_dly [N];
  logic [W-1:0]    c2_dly [N];
  logic [W-1:0]    comb1, comb2;
  logic [$clog2(SKIP+2)-1:0] n_out;

  assign dec_strobe = in_valid && (phase == PH_W'(R - 1));
  assign integ1_nx = integ1 + W'(x);
  assign integ2_nx = integ2 + integ1_nx;
  // the decimated sample includes the input of the strobe cycle
  assign comb1 = integ2_nx - c1_dly[N-1];
  assign comb2 = comb1  - c2_dly[N-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ1 <= '0;
      integ2 <= '0;
      phase  <= '0;
    end else if (in_valid) begin
      integ1 <= integ1_nx;
      integ2 <= integ2_nx;
      phase  <= (phase == PH_W'(R - 1)) ? '0 : phase + PH_W'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        c1_dly[i] <= '0;
        c2_dly[i] <= '0;
      end
      out_valid <= 1'b0;
      y         <= '0;
      n_out     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (dec_strobe) begin
        c1_dly[0] <= integ2_nx;
        c2_dly[0] <= comb1;
        for (int i = 1; i < N; i++) begin
          c1_dly[i] <= c1_dly[i-1];
          c2_dly[i] <= c2_dly[i-1];
        end
        y <= (IN_W+OUT_FRAC)'(comb2 >> SHIFT);
        if (n_out >= ($bits(n_out))'(SKIP)) out_valid <= 1'b1;
        else                                 n_out     <= n_out + 1'b1;
      end
    end
  end

  initial begin
    assert (R * N == 2 ** $clog2(R * N))
      else $error("cic_decimator: R*N must be a power of two for exact output scaling");
    assert (GROWTH >= OUT_FRAC)
      else $error("cic_decimator: OUT_FRAC larger than the bit growth");
  end
endmodule
