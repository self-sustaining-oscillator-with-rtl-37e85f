// tb_pulse_width_gen: comparator edges at random positions within a clock
// cycle; each must give exactly one pulse of tw cycles starting on the third
// clock edge after the comparator edge. Also tw = 0 (no pulse) and retrigger
// while a pulse is running (pulse restarts, lasts tw from the new edge).
`timescale 1ns/1ps
module tb_pulse_width_gen;
  logic        clk = 1'b0, rst_n = 1'b0, comp_in = 1'b0;
  logic [15:0] tw = 16'd5;
  logic        pulse;
  int checks = 0, failures = 0;

  pulse_width_gen dut (.clk(clk), .rst_n(rst_n), .comp_in(comp_in), .tw(tw), .pulse(pulse));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // record pulse high cycles
  int high_cnt;
  always @(posedge clk) #1 if (pulse) high_cnt++;

  initial begin
    #22 rst_n = 1'b1;
    for (int i = 0; i < 60; i++) begin
      int start, width, w;
      w = (i % 10 == 9) ? 0 : $urandom_range(1, 40);
      tw = 16'(w);
      @(posedge clk);
      #($urandom_range(1, 8)) comp_in = 1'b1;
      // clock edges after the comparator edge
      start = 0;
      high_cnt = 0;
      for (int c = 1; c <= 3; c++) begin
        @(posedge clk); #1;
        if (pulse && start == 0) start = c;
      end
      if (w > 0) check(start == 3, $sformatf("pulse starts %0d edges after comparator edge", start));
      else       check(start == 0, "tw = 0 gives no pulse");
      repeat (w + 5) @(posedge clk);
      #2;
      check(high_cnt == w, $sformatf("pulse width %0d expected %0d", high_cnt, w));
      comp_in = 1'b0;
      repeat (3) @(posedge clk);
    end
    // retrigger during a pulse
    tw = 16'd20;
    @(posedge clk); #3 comp_in = 1'b1;
    repeat (10) @(posedge clk);
    #3 comp_in = 1'b0;
    repeat (3) @(posedge clk);
    #3 comp_in = 1'b1;
    high_cnt = 0;
    repeat (40) @(posedge clk);
    #2;
    // the first pulse is still high on the two synchroniser edges, then the
    // restarted pulse runs for tw = 20 cycles
    check(high_cnt == 2 + 20, $sformatf("retriggered pulse high %0d cycles", high_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
