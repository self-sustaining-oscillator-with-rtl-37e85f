// tb_pulse_delay: random pulse trains; after reset and for several td
// values (0, 1, small, MAX_TD-1), dout in every cycle must equal din of
// td+1 cycles earlier, and 0 while fewer samples have been written.
module tb_pulse_delay;
  localparam int MAX_TD = 64;
  logic       clk = 1'b0, rst_n = 1'b0, din = 1'b0;
  logic [5:0] td = '0;
  logic       dout;
  int checks = 0, failures = 0;

  pulse_delay #(.MAX_TD(MAX_TD)) dut (.clk(clk), .rst_n(rst_n), .din(din), .td(td), .dout(dout));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit hist[$];    // din value sampled at each posedge since reset

  initial begin
    int tds[6] = '{0, 1, 7, 33, 63, 20};
    foreach (tds[j]) begin
      rst_n = 1'b0;
      hist.delete();
      td = 6'(tds[j]);
      @(negedge clk); rst_n = 1'b1;
      for (int c = 0; c < 400; c++) begin
        din = ($urandom_range(0, 4) == 0);
        @(posedge clk);
        hist.push_back(din);
        @(negedge clk);
        // output after this edge = din sampled td edges before
        if (hist.size() > tds[j])
          check(dout == hist[hist.size() - 1 - tds[j]],
                $sformatf("td=%0d cycle %0d: dout=%0b", tds[j], c, dout));
        else
          check(dout == 1'b0, "output 0 before the buffer holds td+1 samples");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
