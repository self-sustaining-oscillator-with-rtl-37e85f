// tb_time_to_freq: random periods (20 Hz .. 10 MHz inputs) and k values;
// each result must equal floor(k * 76.92e6 * 2^7 * 2^16 * 2^16 / P) within
// one LSB (double-precision reference), arrive exactly 83 cycles after
// in_valid, and requests while busy must be ignored. P = 0 and an overflowing
// result must saturate to all ones.
module tb_time_to_freq;
  logic        clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [47:0] period = '0, f;
  logic [15:0] k = 16'd1;
  logic        busy, out_valid;
  int checks = 0, failures = 0;

  time_to_freq dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .period(period), .k(k),
                    .busy(busy), .out_valid(out_valid), .f(f));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic convert(input logic [47:0] p, input logic [15:0] kk, output logic [47:0] res, output int lat);
    @(negedge clk);
    period = p; k = kk; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    lat = 1;
    // a second request while busy must be ignored
    period = 48'd1; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0; lat++;
    while (!out_valid && lat < 500) begin @(negedge clk); lat++; end
    res = f;
    @(negedge clk);
    check(out_valid == 1'b0 && busy == 1'b0, "single result, idle afterwards");
  endtask

  initial begin
    logic [47:0] res;
    int lat;
    #12 rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      real fhz, ticks, pr, er;
      logic [15:0] kk;
      logic [47:0] p;
      kk  = (i % 4 == 0) ? 16'd1 : 16'($urandom_range(1, 200));
      fhz = 20.0 * (10.0 ** ($urandom_range(0, 5000) / 1000.0));  // 20 Hz .. 2 MHz
      ticks = real'(kk) / fhz * 76.92e6 * 128.0 * 65536.0;     // period word
      if (ticks > 2.0 ** 47) ticks = 2.0 ** 47;
      p  = 48'(longint'(ticks / 1024.0)) << 10;
      p  = p | 48'($urandom_range(0, 1023));
      pr = real'(p);
      er = real'(kk) * 76.92e6 * 128.0 * 65536.0 * 65536.0 / pr;
      convert(p, kk, res, lat);
      check(lat - 1 == 83, $sformatf("latency %0d cycles, expected 83", lat - 1));
      check((real'(res) - er) <= 1.0 && (er - real'(res)) <= 1.0,
            $sformatf("k=%0d P=%0d f=%0d expected %f", kk, p, res, er));
    end
    // 119 kHz example: P = 646.4 clock cycles -> f = 119,000 Hz
    begin
      real er;
      logic [47:0] p;
      p = 48'(longint'(76.92e6 / 119000.0 * 128.0 * 65536.0));
      convert(p, 16'd1, res, lat);
      er = 76.92e6 * 128.0 * 65536.0 * 65536.0 / real'(p);
      check((real'(res) - er) <= 1.0 && (er - real'(res)) <= 1.0, "119 kHz example");
      check((res >> 16) == 48'd119000 || (res >> 16) == 48'd118999, $sformatf("119 kHz integer part %0d", res >> 16));
    end
    convert(48'd0, 16'd1, res, lat);
    check(res == '1, "P = 0 saturates");
    convert(48'd1, 16'd100, res, lat);
    check(res == '1, "overflow saturates");
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
