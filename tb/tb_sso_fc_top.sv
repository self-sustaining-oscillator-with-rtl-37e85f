// tb_sso_fc_top: end-to-end run of the complete design at its default
// parameters (76.92 MHz clock, R = 8192, N = 2, 200 Hz low-pass), standing in
// for the analog part of the oscillator with a square-wave source at the
// resonator's 119 kHz that drives both the comparator input and the counter
// input. It runs these phases and counts each mechanism:
//   1. k = 1, low-pass active: f must settle to the source frequency (+-1 Hz)
//   2. +500 Hz frequency step: the filtered output must follow, passing 63%
//      of the step within 5..15 output samples and settling again
//   3. low-pass bypassed (raw path): f within +-3 Hz
//   4. k = 2 (divider active): f within +-3 Hz, raw intervals 2 periods long
// Throughout, every comparator edge must give one drive pulse of tw cycles,
// starting td + 4 clock edges after the comparator edge, and f_valid must
// come every 8192 clock cycles (9.39 kHz).
`timescale 1ps/1fs
module tb_sso_fc_top;
  localparam realtime THALF = 6500.26;          // 76.92 MHz clock
  localparam real     TCLK  = 2.0 * 6500.26;
  localparam int      R     = 8192;
  logic        clk = 1'b0, rst_n = 1'b0, sig = 1'b0;
  logic [15:0] k = 16'd1;
  logic [17:0] coef = 18'(fc_pkg::LPF_COEF_200HZ);
  logic        bypass = 1'b0;
  logic [15:0] tw = 16'd20;
  logic [9:0]  td = 10'd100;
  logic        raw_valid, dec_valid, f_valid, drive_pulse;
  logic [31:0] raw_ivl;
  logic [47:0] dec_ivl, f;
  int checks = 0, failures = 0;

  sso_fc_top dut (
    .clk(clk), .rst_n(rst_n),
    .fc_in(sig), .k(k), .lpf_coef(coef), .lpf_bypass(bypass),
    .raw_valid(raw_valid), .raw_ivl(raw_ivl), .dec_valid(dec_valid), .dec_ivl(dec_ivl),
    .f_valid(f_valid), .f(f),
    .comp_in(sig), .tw(tw), .td(td), .drive_pulse(drive_pulse));

  always #(THALF) clk = ~clk;

  real fsrc = 119000.0;
  always #(0.5e12 / fsrc) sig = ~sig;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real fout();
    return real'(f) / 65536.0;
  endfunction

  longint n_clk = 0;
  always @(posedge clk) n_clk++;

  // ---- frequency output spacing and latest value ----
  longint last_f_clk = 0;
  int     n_f = 0;
  always @(posedge clk) if (rst_n && f_valid) begin
    if (last_f_clk != 0) check(n_clk - last_f_clk == R, $sformatf("f_valid spacing %0d", n_clk - last_f_clk));
    last_f_clk = n_clk;
    n_f++;
  end

  // ---- raw intervals: k periods in units of T_CLK/128 ----
  int  raw_skip = 0, n_raw_k2 = 0;
  always @(posedge clk) if (rst_n && raw_valid) begin
    real e;
    e = real'(k) * (1.0e12 / fsrc) / (TCLK / 128.0);
    if (raw_skip > 0) raw_skip--;
    else begin
      check(rabs(real'(raw_ivl) - e) <= 1.5, $sformatf("raw interval %0d expected %f", raw_ivl, e));
      if (k == 16'd2) n_raw_k2++;
    end
  end

  // ---- drive pulses: one per comparator edge, tw long, td+4 edges late ----
  longint comp_edge_clk[$];
  int n_pulses = 0;
  longint pulse_start = 0;
  logic drive_q = 1'b0;
  always @(posedge sig) if (rst_n) comp_edge_clk.push_back(n_clk);
  always @(posedge clk) begin
    drive_q <= drive_pulse;
    if (rst_n && drive_pulse && !drive_q) begin
      longint e;
      pulse_start = n_clk;
      if (comp_edge_clk.size() == 0) check(0, "drive pulse without comparator edge");
      else begin
        e = comp_edge_clk.pop_front();
        // the comparator edge fell after clock edge e; the pulse rose on edge
        // e + td + 4 and is seen here, through drive_q, one edge later
        check(n_clk - e == longint'(td) + 5, $sformatf("drive pulse %0d edges after comparator edge", n_clk - e));
      end
    end
    if (rst_n && !drive_pulse && drive_q) begin
      n_pulses++;
      check(n_clk - pulse_start == longint'(tw), $sformatf("drive pulse width %0d", n_clk - pulse_start));
    end
  end

  // wait for n frequency outputs, return the last
  task automatic wait_f(input int n);
    repeat (n) begin
      @(posedge clk);
      while (!f_valid) @(posedge clk);
    end
    #1;
  endtask

  int mech_lpf = 0, mech_step = 0, mech_bypass = 0, mech_k = 0;

  initial begin
    int n63;
    real f0, f1;
    repeat (5) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. k = 1, filtered
    wait_f(1);
    check(n_clk < 6 * R, $sformatf("first f after %0d cycles", n_clk));
    wait_f(60);
    f0 = fout();
    check(rabs(f0 - fsrc) <= 1.0, $sformatf("filtered f=%f expected %f", f0, fsrc));
    wait_f(5);
    check(rabs(fout() - fsrc) <= 1.0, $sformatf("filtered f=%f expected %f", fout(), fsrc));
    mech_lpf++;

    // 2. frequency step, filtered output tracks it
    fsrc = 119500.0;
    raw_skip = 2;
    n63 = -1;
    for (int i = 1; i <= 80; i++) begin
      wait_f(1);
      if (n63 < 0 && fout() >= f0 + 0.632 * 500.0) n63 = i;
    end
    check(n63 >= 5 && n63 <= 15, $sformatf("63%% of the step after %0d samples", n63));
    check(rabs(fout() - fsrc) <= 1.0, $sformatf("after step f=%f expected %f", fout(), fsrc));
    if (n63 > 0) mech_step++;

    // 3. raw (bypassed) path
    bypass = 1'b1;
    wait_f(3);
    for (int i = 0; i < 10; i++) begin
      wait_f(1);
      check(rabs(fout() - fsrc) <= 3.0, $sformatf("raw f=%f expected %f", fout(), fsrc));
    end
    mech_bypass++;

    // 4. k = 2
    k = 16'd2;
    raw_skip = 2;
    wait_f(6);
    for (int i = 0; i < 10; i++) begin
      wait_f(1);
      check(rabs(fout() - fsrc) <= 3.0, $sformatf("k=2 f=%f expected %f", fout(), fsrc));
    end
    if (n_raw_k2 > 10) mech_k++;

    check(n_pulses > 1000, $sformatf("%0d drive pulses", n_pulses));
    check(mech_lpf > 0,    "mechanism: low-pass filtered output");
    check(mech_step > 0,   "mechanism: frequency step tracked");
    check(mech_bypass > 0, "mechanism: low-pass bypass");
    check(mech_k > 0,      "mechanism: divider k > 1");
    $display("mechanisms: lpf %0d, step %0d, bypass %0d, k>1 %0d, drive pulses %0d, f samples %0d",
             mech_lpf, mech_step, mech_bypass, mech_k, n_pulses, n_f);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(TCLK * 250.0 * R);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
