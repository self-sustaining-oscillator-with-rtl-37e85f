// tb_lowpass_filter: compares the filter with a double-precision model of
// the first-order Butterworth recursion y = b0*(x + x1) + (1 - 2*b0)*y1 for
// random inputs around a large offset (tolerance 64 LSB against the model's
// rounding-free result), checks the step response time constant of the
// 200 Hz / 9.39 kHz default coefficient (63% within 7..8 samples), DC
// convergence, the bypass mode and the one-cycle output latency.
module tb_lowpass_filter;
  localparam int W = 48, CW = 18;
  logic          clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, bypass = 1'b0;
  logic [W-1:0]  x = '0, y;
  logic [CW-1:0] coef = CW'(fc_pkg::LPF_COEF_200HZ);
  logic          out_valid;
  int checks = 0, failures = 0;

  lowpass_filter #(.W(W), .COEF_W(CW)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .coef(coef), .bypass(bypass), .out_valid(out_valid), .y(y));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // present one sample, gaps of idle cycles between samples
  task automatic push(input logic [W-1:0] v);
    @(negedge clk);
    x = v; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    check(out_valid == 1'b1, "out_valid one cycle after in_valid");
    repeat (3) begin
      @(negedge clk);
      check(out_valid == 1'b0, "out_valid lasts one cycle");
    end
  endtask

  initial begin
    real b0, yr, x1r;
    real base;
    base = real'(64'd82700 << 16);
    b0 = real'(coef) / real'(1 << CW);
    #12 rst_n = 1'b1;
    // random sequence compared against the model
    yr = 0.0; x1r = 0.0;
    for (int i = 0; i < 300; i++) begin
      logic [W-1:0] v;
      v = W'(64'd82700 << 16) + W'($urandom_range(0, 1 << 22)) - W'(1 << 21);
      push(v);
      if (i == 0) begin yr = real'(v); end
      else yr = b0 * (real'(v) + x1r) + (1.0 - 2.0 * b0) * yr;
      x1r = real'(v);
      check((real'(y) - yr) < 64.0 && (yr - real'(y)) < 64.0,
            $sformatf("sample %0d: y=%0d model=%f", i, y, yr));
    end
    // step response: from base to base + 2^24, 63% after about 1/(2*pi*200/9389.6) = 7.5 samples
    begin
      real step, thr;
      int n63;
      for (int i = 0; i < 50; i++) push(W'(64'd82700 << 16));
      step = real'(1 << 24);
      thr  = base + 0.632 * step;
      n63 = -1;
      for (int i = 1; i <= 200; i++) begin
        push(W'(64'd82700 << 16) + W'(1 << 24));
        if (n63 < 0 && real'(y) >= thr) n63 = i;
      end
      check(n63 >= 7 && n63 <= 9, $sformatf("63%% step response after %0d samples", n63));
      check(y >= W'(64'd82700 << 16) + W'(1 << 24) - W'(16) && y <= W'(64'd82700 << 16) + W'(1 << 24) + W'(16),
            $sformatf("DC convergence y=%0d", y));
    end
    // bypass passes samples unchanged
    bypass = 1'b1;
    for (int i = 0; i < 20; i++) begin
      logic [W-1:0] v;
      v = {$urandom, $urandom};
      push(v);
      check(y == v, "bypass passes input");
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
