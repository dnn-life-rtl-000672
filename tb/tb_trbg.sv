// tb_trbg: checks the behavioural random bit generator.
// Samples 4000 bits from an unbiased and a 70 %-biased instance and checks
// that the fraction of ones is within a few standard deviations of 0.5 and
// 0.7, that the output is 0 in reset, and that it actually changes.
module tb_trbg;
  logic clk = 0, rst_n = 0;
  logic b50, b70;
  int checks = 0, failures = 0;
  int ones50 = 0, ones70 = 0, toggles = 0;
  logic prev;

  always #5 clk = ~clk;

  trbg #(.BIAS_PERMIL(500)) u50 (.clk, .rst_n, .bit_o(b50));
  trbg #(.BIAS_PERMIL(700)) u70 (.clk, .rst_n, .bit_o(b70));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 check(b50 == 0 && b70 == 0, "output not 0 in reset");
    rst_n = 1;
    @(posedge clk); #1 prev = b50;
    for (int k = 0; k < 4000; k++) begin
      @(posedge clk); #1;
      ones50 += b50;
      ones70 += b70;
      toggles += (b50 != prev);
      prev = b50;
    end
    // sigma of the count is about 32 and 29: allow 5 sigma
    check(ones50 > 1840 && ones50 < 2160, $sformatf("unbiased ones=%0d", ones50));
    check(ones70 > 2650 && ones70 < 2950, $sformatf("biased ones=%0d", ones70));
    check(toggles > 1500, $sformatf("toggles=%0d", toggles));
    $display("ones50=%0d ones70=%0d toggles=%0d", ones50, ones70, toggles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
