// tb_processing_array: self-checking test of the array of F PEs.
// All PEs share the activation word; PE p uses weights [p*N*8 +: N*8].
// Each of the F sums is compared with a dot product computed in the
// testbench.
module tb_processing_array;
  localparam int F = 8, N = 8, S = 8 + 8 + 3;
  logic [N*8-1:0]   act;
  logic [F*N*8-1:0] wgt;
  logic [F*S-1:0]   psum;
  int checks = 0, failures = 0;

  processing_array #(.F(F), .N(N)) dut (.act, .wgt, .psum);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      for (int i = 0; i < N; i++) act[i*8 +: 8] = 8'($urandom);
      for (int i = 0; i < F * N; i++) wgt[i*8 +: 8] = 8'($urandom);
      #1;
      for (int p = 0; p < F; p++) begin
        int e;
        e = 0;
        for (int i = 0; i < N; i++)
          e += int'($signed(act[i*8 +: 8])) * int'($signed(wgt[(p*N + i)*8 +: 8]));
        checks++;
        if (int'($signed(psum[p*S +: S])) != e) begin
          failures++;
          if (failures < 5) $display("FAIL k=%0d p=%0d", k, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
