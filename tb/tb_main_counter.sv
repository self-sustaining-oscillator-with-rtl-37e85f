// tb_main_counter: generates true edge times e_n (in fine units), presents
// each as a hit in clock cycle ceil(e_n/128) with fine = 128*cycle - e_n, and
// checks every interval against e_n - e_{n-1}, the output latency of one
// cycle, and correct results across counter wrap-around (TS_W = 20 here).
module tb_main_counter;
  localparam int FB = 7, TW = 20;
  logic          clk = 1'b0, rst_n = 1'b0, hit = 1'b0;
  logic [FB-1:0] fine = '0;
  logic [TW-1:0] ts, ivl;
  logic          ivl_valid;
  int checks = 0, failures = 0;

  main_counter #(.FINE_BITS(FB), .TS_W(TW)) dut (.clk(clk), .rst_n(rst_n), .hit(hit), .fine(fine),
                                                 .ts(ts), .ivl_valid(ivl_valid), .ivl(ivl));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // cycle counter matching the DUT's coarse counter: value seen at a posedge
  longint cyc = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  initial begin
    longint e_prev, e_now, c;
    int n_valid;
    #12 rst_n = 1'b1;
    // first edge: reference only
    e_prev = 0;
    for (int n = 0; n < 1000; n++) begin
      // next edge 3..40 cycles later, random fine position
      e_now = e_prev + 3 * 128 + longint'($urandom_range(0, 37 * 128));
      if (n == 0) e_now = 1000;
      c = (e_now + 127) / 128;                    // cycle in which the edge is seen
      while (cyc < c - 1) @(negedge clk);
      // at this negedge cyc == c-1; next posedge the DUT coarse count becomes... apply hit now
      hit  = 1'b1;
      fine = FB'(c * 128 - e_now);
      @(negedge clk);
      hit  = 1'b0;
      if (n > 0) begin
        check(ivl_valid == 1'b1, $sformatf("valid one cycle after hit %0d", n));
        check(ivl == TW'(e_now - e_prev), $sformatf("edge %0d: ivl=%0d expected %0d", n, ivl, e_now - e_prev));
      end else begin
        check(ivl_valid == 1'b0, "no interval for the first edge");
      end
      @(negedge clk);
      check(ivl_valid == 1'b0, "valid lasts one cycle");
      e_prev = e_now;
    end
    check(cyc > (1 << (TW - FB)) * 2, "coarse counter wrapped at least twice");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
