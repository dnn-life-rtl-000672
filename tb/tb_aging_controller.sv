// tb_aging_controller: self-checking test of the aging mitigation controller.
// Drives the random-bit input and New Data Block pulses (with idle gaps of
// random length) and compares E and the block counter every cycle against
// a reference model: counter += new_block; on new_block, E = rnd ^ cnt[M-1],
// otherwise E holds. Also checks that with a 70 %-biased random input the
// fraction of blocks encoded with E = 1 comes out near 0.5 (bias balancing),
// as it must over whole periods of 2^M blocks.
module tb_aging_controller;
  localparam int M = 4;
  logic         clk = 0, rst_n = 0;
  logic         trbg_bit = 0, new_block = 0;
  logic         e;
  logic [M-1:0] block_cnt;
  int checks = 0, failures = 0;

  logic [M-1:0] ref_cnt;
  logic         ref_e;
  int           blocks = 0, ones_e = 0, ones_rnd = 0;

  always #5 clk = ~clk;

  aging_controller #(.M(M)) dut (.clk, .rst_n, .trbg_bit, .new_block, .e, .block_cnt);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, updated on the same edges
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_cnt <= '0;
      ref_e   <= 1'b0;
    end else begin
      if (new_block) begin
        ref_e   <= trbg_bit ^ ref_cnt[M-1];
        ref_cnt <= ref_cnt + 1'b1;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (e !== 1'b0 || block_cnt !== '0) begin failures++; $display("FAIL reset state"); end
    rst_n = 1;
    for (int k = 0; k < 4096; k++) begin
      // drive inputs away from the edge
      @(negedge clk);
      new_block = ($urandom % 3) == 0;
      trbg_bit  = ($urandom % 1000) < 700;
      if (new_block) begin
        blocks++;
        ones_rnd += trbg_bit;
      end
      @(posedge clk); #1;
      checks++;
      if (e !== ref_e || block_cnt !== ref_cnt) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d e=%0b ref=%0b cnt=%0d ref=%0d", k, e, ref_e, block_cnt, ref_cnt);
      end
      if (new_block) ones_e += e;
    end
    // finish on a whole number of 2^M-block periods
    while (ref_cnt != '0) begin
      @(negedge clk);
      new_block = 1;
      trbg_bit  = ($urandom % 1000) < 700;
      blocks++;
      ones_rnd += trbg_bit;
      @(posedge clk); #1;
      ones_e += e;
      checks++;
      if (e !== ref_e) failures++;
    end
    new_block = 0;
    $display("blocks=%0d random ones=%0d E ones=%0d", blocks, ones_rnd, ones_e);
    // raw source biased (~0.7); balanced E within 0.45..0.55
    checks++;
    if (ones_rnd * 100 < blocks * 65) begin failures++; $display("FAIL source not biased"); end
    checks++;
    if (ones_e * 100 < blocks * 45 || ones_e * 100 > blocks * 55) begin
      failures++; $display("FAIL E not balanced");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
