// tb_workload_k_sweep: the gate-time sweep k = 1, 41, 81, 121, 161 at the
// default configuration (76.92 MHz, R = 8192, 200 Hz low-pass) on a 119 kHz
// input whose rising edges carry white timing jitter (uniform +-1 ns, a
// stand-in for detection noise). For every k the raw path (low-pass
// bypassed) and the filtered path each deliver 30 settled samples; the test
// checks that both means lie within 1 Hz of the source frequency, that the
// filtered samples scatter less than the raw ones, and prints the standard
// deviations. f_valid must come every 8192 cycles throughout.
`timescale 1ps/1fs
module tb_workload_k_sweep;
  localparam realtime THALF = 6500.26;
  localparam real     TCLK  = 2.0 * 6500.26;
  localparam int      R     = 8192;
  localparam real     FSRC  = 119000.0;
  localparam real     JIT   = 1000.0;              // ps, peak
  logic        clk = 1'b0, rst_n = 1'b0, sig = 1'b0;
  logic [15:0] k = 16'd1;
  logic [17:0] coef = 18'(fc_pkg::LPF_COEF_200HZ);
  logic        bypass = 1'b1;
  logic        raw_valid, dec_valid, f_valid;
  logic [31:0] raw_ivl;
  logic [47:0] dec_ivl, f;
  int checks = 0, failures = 0;

  freq_counter dut (.clk(clk), .rst_n(rst_n), .sig_in(sig), .k(k), .lpf_coef(coef),
    .lpf_bypass(bypass), .raw_valid(raw_valid), .raw_ivl(raw_ivl), .dec_valid(dec_valid),
    .dec_ivl(dec_ivl), .f_valid(f_valid), .f(f));

  always #(THALF) clk = ~clk;

  // jittered square wave: rising edge n at n*T + j_n, falling edge T/2 later
  realtime t_nom = 100000.0;
  always begin
    real j;
    t_nom = t_nom + 1.0e12 / FSRC;
    j = (real'($urandom_range(0, 2000)) / 1000.0 - 1.0) * JIT;
    #(t_nom + j - $realtime) sig = 1'b1;
    #(0.5e12 / FSRC) sig = 1'b0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint n_clk = 0, last_f_clk = 0;
  always @(posedge clk) n_clk++;
  always @(posedge clk) if (rst_n && f_valid) begin
    if (last_f_clk != 0) check(n_clk - last_f_clk == R, "f_valid spacing");
    last_f_clk = n_clk;
  end

  task automatic wait_f(input int n);
    repeat (n) begin
      @(posedge clk);
      while (!f_valid) @(posedge clk);
    end
    #1;
  endtask

  // collect n samples; return mean and standard deviation in Hz
  task automatic collect(input int n, output real mean, output real sd);
    real s, s2, v;
    s = 0.0; s2 = 0.0;
    for (int i = 0; i < n; i++) begin
      wait_f(1);
      v = real'(f) / 65536.0 - FSRC;
      s += v; s2 += v * v;
    end
    mean = FSRC + s / n;
    sd   = (s2 / n - (s / n) * (s / n));
    sd   = (sd > 0.0) ? $sqrt(sd) : 0.0;
  endtask

  initial begin
    int ks[5] = '{1, 41, 81, 121, 161};
    int n_k = 0;
    repeat (5) @(posedge clk);
    #1 rst_n = 1'b1;
    foreach (ks[i]) begin
      real m_raw, sd_raw, m_f, sd_f;
      int settle;
      k = 16'(ks[i]);
      // settle: a few k-period intervals plus the CIC window, in output samples
      settle = 6 + (4 * ks[i] * 647) / R;
      bypass = 1'b1;
      wait_f(settle);
      collect(30 + (ks[i] * 647) / R * 4, m_raw, sd_raw);
      bypass = 1'b0;
      wait_f(60);
      collect(30, m_f, sd_f);
      $display("k=%0d: raw mean %.3f Hz sd %.4f Hz | filtered mean %.3f Hz sd %.4f Hz",
               ks[i], m_raw, sd_raw, m_f, sd_f);
      check(m_raw > FSRC - 1.0 && m_raw < FSRC + 1.0, $sformatf("k=%0d raw mean %f", ks[i], m_raw));
      check(m_f > FSRC - 1.0 && m_f < FSRC + 1.0, $sformatf("k=%0d filtered mean %f", ks[i], m_f));
      check(sd_f < sd_raw, $sformatf("k=%0d filtered sd %f not below raw sd %f", ks[i], sd_f, sd_raw));
      n_k++;
    end
    check(n_k == 5, "all five gate times ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(TCLK * 2000.0 * R);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
