// tb_rdd: self-checking test of the Read Data Decoder.
// Drives random words with E = 0 and E = 1 and compares dout with din and
// with ~din, computed in the testbench. Combinational: checked 1 ns after
// each change. Ends with the TB_RESULT line.
module tb_rdd;
  localparam int W = 64;
  logic         e;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0;

  rdd #(.WIDTH(W)) dut (.e, .din, .dout);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      din = {$urandom, $urandom};
      e   = k[0];
      #1;
      checks++;
      if (dout !== (e ? ~din : din)) begin
        failures++;
        $display("FAIL e=%0b din=%h dout=%h", e, din, dout);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
