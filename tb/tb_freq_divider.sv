// tb_freq_divider: checks that div_out rises once per k input rising edges,
// on exactly the k-th, 2k-th, ... edge, for k = 1, 2, 3, 5 and 0 (= 1), and
// that it is the input itself for k = 1.
`timescale 1ns/1ps
module tb_freq_divider;
  logic        sig_in = 1'b0;
  logic        rst_n  = 1'b0;
  logic [15:0] k      = 16'd1;
  logic        div_out;
  int checks = 0, failures = 0;

  freq_divider dut (.sig_in(sig_in), .rst_n(rst_n), .k(k), .div_out(div_out));

  int n_in, n_out, last_in_at_out;
  logic div_prev = 1'b0;

  // count input edges and output edges; record input edge count at each output edge
  always @(posedge sig_in) n_in++;
  always @(posedge div_out) begin
    n_out++;
    last_in_at_out = n_in;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_k(input int kk, input int edges);
    int kexp;
    kexp = (kk <= 1) ? 1 : kk;
    k = 16'(kk);
    rst_n = 1'b0; #5; rst_n = 1'b1; #5;
    n_in = 0; n_out = 0;
    for (int i = 0; i < edges; i++) begin
      #7 sig_in = 1'b1;
      #1;
      if (kexp == 1) check(div_out == 1'b1, $sformatf("k=%0d: div_out follows high input", kk));
      else if (n_in % kexp == 0)
        check(n_out == n_in / kexp && last_in_at_out == n_in,
              $sformatf("k=%0d: output edge on input edge %0d (n_out=%0d)", kk, n_in, n_out));
      #5 sig_in = 1'b0;
      #1;
      if (kexp == 1) check(div_out == 1'b0, $sformatf("k=%0d: div_out follows low input", kk));
    end
    check(n_out == edges / kexp, $sformatf("k=%0d: %0d output edges for %0d input edges", kk, n_out, edges));
  endtask

  initial begin
    run_k(1, 20);
    run_k(2, 20);
    run_k(3, 21);
    run_k(5, 25);
    run_k(0, 10);
    run_k(4, 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
