// tb_accumulation_unit: self-checking test of the accumulators.
// Random sequences of en/clear with random signed partial sums; the F
// accumulators are compared every cycle with a model, and the requantised
// outputs (arithmetic shift, saturation to int8) with values computed here.
module tb_accumulation_unit;
  localparam int F = 8, S = 19, ACC = 32;
  logic             clk = 0, rst_n = 0;
  logic             en = 0, clear = 0;
  logic [F*S-1:0]   psum = '0;
  logic [4:0]       shift = '0;
  logic [F*ACC-1:0] acc;
  logic [F*8-1:0]   act_out;
  int               model [F];
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;

  always #5 clk = ~clk;

  accumulation_unit #(.F(F), .S_BITS(S), .ACC(ACC), .O_BITS(8)) dut (
    .clk, .rst_n, .en, .clear, .psum, .shift, .acc, .act_out);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < F; p++) model[p] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      en    = ($urandom % 4) != 0;
      clear = ($urandom % 8) == 0;
      shift = 5'($urandom % 12);
      for (int p = 0; p < F; p++) psum[p*S +: S] = S'($urandom);
      if (en)
        for (int p = 0; p < F; p++)
          model[p] = (clear ? 0 : model[p]) + int'($signed(psum[p*S +: S]));
      @(posedge clk); #1;
      for (int p = 0; p < F; p++) begin
        int sh, q;
        sh = model[p] >>> shift;
        q  = (sh > 127) ? 127 : (sh < -128) ? -128 : sh;
        if (sh > 127) sat_hi++;
        if (sh < -128) sat_lo++;
        checks += 2;
        if (int'($signed(acc[p*ACC +: ACC])) != model[p]) begin
          failures++;
          if (failures < 5) $display("FAIL acc k=%0d p=%0d", k, p);
        end
        if (int'($signed(act_out[p*8 +: 8])) != q) begin
          failures++;
          if (failures < 5) $display("FAIL act k=%0d p=%0d got=%0d exp=%0d", k, p, $signed(act_out[p*8 +: 8]), q);
        end
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("FAIL saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
