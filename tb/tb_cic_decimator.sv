// tb_cic_decimator: (1) R = 4, N = 2 with random inputs and random gaps in
// in_valid: every output is compared with a direct convolution of the input
// history with the triangular CIC impulse response (two boxcars of length
// R*N), scaled by 2^-(GROWTH-OUT_FRAC); output timing (one cycle after each
// R-th input, first 2N-1 outputs withheld) is checked too.
// (2) The default configuration (R = 8192, N = 2): a constant input must come
// out as exactly input * 2^16 once per 8192 inputs, first after 4*8192 inputs.
module tb_cic_decimator;
  localparam int R = 4, N = 2, IW = 12, OF = 4;
  localparam int RN = R * N, HL = 2 * RN - 1, SHIFT = 2 * $clog2(RN) - OF;
  logic          clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [IW-1:0] x = '0;
  logic          out_valid;
  logic [IW+OF-1:0] y;
  // full-size instance
  logic          in_valid2 = 1'b0;
  logic [31:0]   x2 = 32'd82700;
  logic          out_valid2;
  logic [47:0]   y2;
  int checks = 0, failures = 0;

  cic_decimator #(.R(R), .N(N), .IN_W(IW), .OUT_FRAC(OF)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y));
  cic_decimator dut_full (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid2), .x(x2), .out_valid(out_valid2), .y(y2));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint hist[$];
  int     h[HL];

  initial begin
    for (int i = 0; i < HL; i++) h[i] = (i < RN) ? i + 1 : HL - i;
  end

  function automatic longint ref_out();
    longint s = 0;
    int n = hist.size();
    for (int i = 0; i < HL; i++)
      if (n - 1 - i >= 0) s += longint'(h[i]) * hist[n - 1 - i];
    return s >>> SHIFT;
  endfunction

  int n_out_seen = 0, n_out_exp = 0;
  longint expect_q[$];

  // compare at each output pulse
  always @(negedge clk) if (rst_n && out_valid) begin
    n_out_seen++;
    if (expect_q.size() == 0) check(0, "unexpected output");
    else begin
      longint e;
      e = expect_q.pop_front();
      check(longint'(y) == e, $sformatf("out %0d: y=%0d expected %0d", n_out_seen, y, e));
    end
  end

  initial begin
    #12 rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      x = IW'($urandom);
      if (in_valid) begin
        hist.push_back(longint'(x));
        if (hist.size() % R == 0) begin
          if (hist.size() / R >= 2 * N) begin
            expect_q.push_back(ref_out());
            n_out_exp++;
          end
        end
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (3) @(negedge clk);
    check(n_out_seen == n_out_exp && n_out_exp > 100,
          $sformatf("number of outputs %0d expected %0d", n_out_seen, n_out_exp));

    // ---- default-size instance: R = 8192, N = 2 ----
    begin
      int n_in = 0, n_o = 0;
      in_valid2 = 1'b1;
      while (n_in < 8 * 8192) begin
        @(posedge clk);
        n_in++;
        #1;
        if (out_valid2) begin
          n_o++;
          check(n_in % 8192 == 0 && n_in >= 4 * 8192,
                $sformatf("full-size output after %0d inputs", n_in));
          check(y2 == 48'(x2) << 16, $sformatf("full-size y=%0d expected %0d", y2, 48'(x2) << 16));
        end
      end
      check(n_o == 5, $sformatf("full-size: %0d outputs in 8*8192 inputs, expected 5", n_o));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
