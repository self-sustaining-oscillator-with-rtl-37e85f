// tb_tdc_interpolator: places input edges at known positions inside a
// 13 ns clock period and checks that hit comes on the next clock edge with
// fine = floor(lag / (T_CLK/128)), for every one of the 128 fine codes.
`timescale 1ps/1fs
module tb_tdc_interpolator;
  localparam realtime TCLK = 13000.0;   // ps
  logic       clk = 1'b0, rst_n = 1'b0, edge_in = 1'b0;
  logic       hit;
  logic [6:0] fine;
  int checks = 0, failures = 0;

  tdc_interpolator #(.FINE_BITS(7)) dut (.clk(clk), .rst_n(rst_n), .edge_in(edge_in), .hit(hit), .fine(fine));

  always #(TCLK / 2) clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_hits = 0;
  always @(posedge clk) if (hit) n_hits++;

  initial begin
    int hits_before;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (4) @(posedge clk);
    for (int j = 0; j < 128; j++) begin
      realtime lag;
      // lag from the edge to the next rising clock edge, centred in code j
      lag = (real'(j) + 0.5) * TCLK / 128.0;
      @(posedge clk);
      hits_before = n_hits;
      #(TCLK - lag) edge_in = 1'b1;       // edge inside this clock period
      @(posedge clk); #1;                 // sampling edge
      check(hit == 1'b1, $sformatf("hit after edge, code %0d", j));
      check(fine == 7'(j), $sformatf("fine=%0d expected %0d", fine, j));
      @(posedge clk); #1;
      check(hit == 1'b0, "hit lasts one cycle");
      edge_in = 1'b0;
      repeat (2) @(posedge clk);
      check(n_hits == hits_before + 1, "exactly one hit per edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(TCLK * 5000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
