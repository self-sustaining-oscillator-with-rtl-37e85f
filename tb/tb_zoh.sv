// tb_zoh: random sparse input samples; checks that every clock cycle the
// output equals the latest sample (taken one cycle after it arrived) and
// that out_valid rises with the first sample.
module tb_zoh;
  logic        clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [31:0] in_data = '0, out_data;
  logic        out_valid;
  int checks = 0, failures = 0;

  zoh #(.W(32)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
                     .out_valid(out_valid), .out_data(out_data));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] held;
    bit          have;
    have = 0; held = '0;
    #12 rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(out_valid == have, "out_valid after first sample");
      if (have) check(out_data == held, $sformatf("cycle %0d: out=%0h held=%0h", i, out_data, held));
      in_valid = (i > 20) && ($urandom_range(0, 9) == 0);
      in_data  = $urandom;
      if (in_valid) begin held = in_data; have = 1; end
    end
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
