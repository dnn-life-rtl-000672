// tb_processing_element: self-checking test of one PE.
// Random signed 8-bit activations and weights, including the extreme values
// -128 and 127, against a dot product computed in the testbench.
module tb_processing_element;
  localparam int N = 8, S = 8 + 8 + 3;
  logic [N*8-1:0]      act, wgt;
  logic signed [S-1:0] sum;
  int checks = 0, failures = 0;

  processing_element #(.N(N)) dut (.act, .wgt, .sum);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 1000; k++) begin
      int expect_sum;
      expect_sum = 0;
      for (int i = 0; i < N; i++) begin
        byte a, w;
        case (k)
          0: begin a = -128; w = -128; end
          1: begin a = 127;  w = -128; end
          2: begin a = 127;  w = 127;  end
          default: begin a = byte'($urandom); w = byte'($urandom); end
        endcase
        act[i*8 +: 8] = a;
        wgt[i*8 +: 8] = w;
        expect_sum += int'(a) * int'(w);
      end
      #1;
      checks++;
      if (int'(sum) != expect_sum) begin
        failures++;
        if (failures < 5) $display("FAIL k=%0d sum=%0d expect=%0d", k, sum, expect_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
