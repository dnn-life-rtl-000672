// tb_stream_fifo: self-checking test of the stream FIFO.
// Random valid on the input and random ready on the output; every word that
// leaves is compared, in order, with a queue in the testbench. Checks that
// the FIFO fills (in_ready low), empties, and that count matches the queue.
module tb_stream_fifo;
  localparam int W = 16, D = 4;
  logic         clk = 0, rst_n = 0;
  logic         in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [2:0]   count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, full_seen = 0, moved = 0;

  always #5 clk = ~clk;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                                           .out_valid, .out_ready, .out_data, .count);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((k / 500) % 2 ? 30 : 80);
      in_data   = W'($urandom);
      out_ready = ($urandom % 100) < ((k / 500) % 2 ? 80 : 30);
      #1;
      checks++;
      if (int'(count) != q.size() || out_valid != (q.size() != 0) ||
          in_ready != (q.size() < D || out_ready)) begin
        failures++;
        if (failures < 5) $display("FAIL flags k=%0d count=%0d size=%0d", k, count, q.size());
      end
      if (!in_ready) full_seen++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== q[0]) begin failures++; $display("FAIL data"); end
        void'(q.pop_front());
        moved++;
      end
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (full_seen == 0 || moved < 500) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
