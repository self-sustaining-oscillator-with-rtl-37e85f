// tb_freq_counter: the whole counter chain with a short decimation (R = 256)
// fed by a square wave from a 119 kHz source clocked at 76.92 MHz.
// Checks, against values computed from the generator's own period:
//   - every raw interval equals k * period in units of T_CLK/128 (+-1.5),
//   - decimated intervals equal the same value with 16 fraction bits (+-1.5 units),
//   - f equals the source frequency within 3 Hz, for k = 1 and k = 3,
//     with the low-pass filter bypassed and active,
//   - after a 500 Hz step the bypassed output follows within 8 samples,
//   - f_valid comes once per R clock cycles.
`timescale 1ps/1fs
module tb_freq_counter;
  localparam int R = 256;
  localparam realtime THALF = 6500.26;          // 76.92 MHz clock
  localparam real     TCLK  = 2.0 * 6500.26;
  logic        clk = 1'b0, rst_n = 1'b0, sig = 1'b0;
  logic [15:0] k = 16'd1;
  logic [17:0] coef = 18'(fc_pkg::LPF_COEF_200HZ);
  logic        bypass = 1'b1;
  logic        raw_valid, dec_valid, f_valid;
  logic [31:0] raw_ivl;
  logic [47:0] dec_ivl, f;
  int checks = 0, failures = 0;

  freq_counter #(.R(R)) dut (.clk(clk), .rst_n(rst_n), .sig_in(sig), .k(k), .lpf_coef(coef),
    .lpf_bypass(bypass), .raw_valid(raw_valid), .raw_ivl(raw_ivl), .dec_valid(dec_valid),
    .dec_ivl(dec_ivl), .f_valid(f_valid), .f(f));

  always #(THALF) clk = ~clk;

  real fsrc = 119000.0;
  always begin
    #(0.5e12 / fsrc) sig = ~sig;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real ivl_exp();
    return real'(k) * (1.0e12 / fsrc) / (TCLK / 128.0);
  endfunction

  // quiet: number of raw intervals since the last setting change; checks only when settled
  int raw_since = 0;
  longint change_clk = 0;
  bit check_en = 1'b0;
  longint n_clk = 0, last_f_clk = 0;
  int n_f = 0;
  real f_tol = 3.0;
  always @(posedge clk) n_clk++;

  always @(posedge clk) if (rst_n && check_en) begin
    if (raw_valid) begin
      raw_since++;
      if (raw_since > 2) check(rabs(real'(raw_ivl) - ivl_exp()) <= 1.5,
                               $sformatf("raw interval %0d expected %f", raw_ivl, ivl_exp()));
    end
    if (dec_valid) begin
      if (settled(0)) check(rabs(real'(dec_ivl) / 65536.0 - ivl_exp()) <= 1.5,
                               $sformatf("decimated interval %f expected %f", real'(dec_ivl) / 65536.0, ivl_exp()));
    end
    if (f_valid) begin
      n_f++;
      if (last_f_clk != 0) check(n_clk - last_f_clk == R, $sformatf("f_valid spacing %0d", n_clk - last_f_clk));
      last_f_clk = n_clk;
      if (settled(bypass ? 0 : 60))
        check(rabs(real'(f) / 65536.0 - fsrc) <= f_tol,
              $sformatf("k=%0d bypass=%0b f=%f expected %f", k, bypass, real'(f) / 65536.0, fsrc));
    end
  end

  // settled: more than 3 intervals plus the CIC window (2*R*N cycles) plus
  // two output periods plus extra output samples for the low-pass filter
  function automatic bit settled(input int extra_samples);
    real ivl_cycles;
    ivl_cycles = ivl_exp() / 128.0;
    return real'(n_clk - change_clk) > 3.0 * ivl_cycles + real'(2 * R * 2 + 2 * R + extra_samples * R);
  endfunction

  task automatic settle_and_run(input int n_out);
    raw_since = 0; last_f_clk = 0; change_clk = n_clk;
    repeat (n_out * R) @(posedge clk);
  endtask

  int mech_k1 = 0, mech_kn = 0, mech_byp = 0, mech_lpf = 0, mech_step = 0;

  initial begin
    repeat (5) @(posedge clk);
    #1 rst_n = 1'b1;
    check_en = 1'b1;
    // k = 1, unfiltered
    settle_and_run(30);                         mech_k1++; mech_byp++;
    // 500 Hz step, unfiltered: check the first samples after 8 outputs
    fsrc = 119500.0;
    settle_and_run(30);                         mech_step++;
    // filtered
    bypass = 1'b0;
    settle_and_run(100);                        mech_lpf++;
    // k = 3
    k = 16'd3; bypass = 1'b1;
    settle_and_run(40);                         mech_kn++;
    check(mech_k1 > 0 && mech_kn > 0 && mech_byp > 0 && mech_lpf > 0 && mech_step > 0, "all modes ran");
    check(n_f > 150, $sformatf("%0d frequency outputs", n_f));
    $display("mechanisms: k=1 %0d, k>1 %0d, bypass %0d, lpf %0d, step %0d", mech_k1, mech_kn, mech_byp, mech_lpf, mech_step);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(TCLK * 400.0 * R);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
