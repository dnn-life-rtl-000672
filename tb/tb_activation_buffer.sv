// tb_activation_buffer: self-checking test of the activation memory.
// Writes random words to random addresses of a reduced memory, keeps a copy
// in the testbench, reads back with one cycle of latency, and checks the
// read-during-write rule (old data) and that rdata holds while re is low.
module tb_activation_buffer;
  localparam int W = 64, D = 1024, AW = $clog2(D);
  logic          clk = 0;
  logic          we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0]  wdata = '0, rdata;
  logic [W-1:0]  model [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  activation_buffer #(.WIDTH(W), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = rnd_word(); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random reads
    for (int k = 0; k < 500; k++) begin
      logic [AW-1:0] a;
      a = AW'($urandom);
      @(negedge clk); re = 1; raddr = a;
      // concurrent write to a random address
      we = ($urandom % 2) == 1; waddr = AW'($urandom); wdata = rnd_word();
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 5) $display("FAIL read a=%0d", a);
      end
      if (we) model[waddr] = wdata;
    end
    // rdata holds when re is low
    @(negedge clk); re = 0; we = 0; raddr = raddr + 1'b1;
    begin
      logic [W-1:0] held;
      held = rdata;
      repeat (3) @(posedge clk);
      #1 checks++;
      if (rdata !== held) begin failures++; $display("FAIL rdata not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
