// tb_control_unit: self-checking test of the command sequencer.
// Issues one command of each kind against a small configuration and
// monitors the control outputs every cycle:
//  LOAD_W  - one new_block pulse before the first write, writes to 0..len-1
//            only in cycles where the stream has data;
//  LOAD_A  - writes to addr..addr+len-1 from the input stream;
//  COMPUTE - read addresses (weight i, activation addr+p*stride+i), acc_en /
//            acc_clear one cycle later, write-back to out_addr+p two cycles
//            after the last read of a position, and len*n_pos+2 cycles from
//            the first read to the last write;
//  STORE_A - read addresses addr.., one push per read the next cycle, and a
//            modelled output FIFO that is never overfilled.
module tb_control_unit;
  import dnn_life_pkg::*;
  localparam int WD = 64, AD = 1024, FD = 4;
  localparam int WAW = $clog2(WD), AAW = $clog2(AD), CW = $clog2(FD + 1);

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd = '0;
  logic w_in_valid = 0, w_in_ready, new_block, wbuf_we, wbuf_re;
  logic [WAW-1:0] wbuf_waddr, wbuf_raddr;
  logic a_in_valid = 0, a_in_ready, abuf_we, abuf_wsel, abuf_re;
  logic [AAW-1:0] abuf_waddr, abuf_raddr;
  logic acc_en, acc_clear, a_out_push;
  logic [4:0] shift;
  logic [CW-1:0] a_out_count = '0;
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  control_unit #(.W_DEPTH(WD), .A_DEPTH(AD), .FIFO_DEPTH(FD)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  task automatic send(input cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream sources with random valid
  // (changed 2 ns after the rising edge, sampled at the falling edge)
  always @(posedge clk) begin
    #2;
    w_in_valid = ($urandom % 3) != 0;
    a_in_valid = ($urandom % 3) != 0;
  end

  initial begin
    cmd_t c;
    int n, nb, wr_i, first_rd, last_wr;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---------------- LOAD_W ----------------
    c = '0; c.op = OP_LOAD_W; c.len = 5;
    send(c);
    nb = 0; n = 0;
    while (busy) begin
      @(negedge clk);
      if (new_block) begin
        nb++;
        check(n == 0, "new_block after first write");
      end
      if (wbuf_we) begin
        check(w_in_valid && w_in_ready, "weight write without stream data");
        check(int'(wbuf_waddr) == n, $sformatf("weight write addr %0d exp %0d", wbuf_waddr, n));
        n++;
      end
      check(!(w_in_ready && w_in_valid) || wbuf_we, "weight popped but not written");
    end
    check(nb == 1, "exactly one new_block");
    check(n == 5, "five weight writes");

    // ---------------- LOAD_A ----------------
    c = '0; c.op = OP_LOAD_A; c.addr = 100; c.len = 4;
    send(c);
    n = 0;
    while (busy) begin
      @(negedge clk);
      if (abuf_we) begin
        check(!abuf_wsel && a_in_valid && a_in_ready, "act load write source");
        check(int'(abuf_waddr) == 100 + n, "act load addr");
        n++;
      end
    end
    check(n == 4, "four activation writes");

    // ---------------- COMPUTE ----------------
    c = '0; c.op = OP_COMPUTE; c.addr = 10; c.len = 3; c.stride = 2; c.n_pos = 3;
    c.out_addr = 500; c.shift = 7;
    send(c);
    n = 0; wr_i = 0; first_rd = -1; last_wr = 0;
    begin
      bit pend_en, pend_clr;
      int pend_last [$];
      pend_en = 0; pend_clr = 0;
      while (busy || n < 9 || wr_i < 3) begin
        @(negedge clk);
        if (cyc > 2000) break;
        // accumulate strobes follow the reads by one cycle
        check(acc_en == pend_en && (!acc_en || acc_clear == pend_clr), "acc_en/acc_clear timing");
        check(shift == 5'd7, "shift");
        if (abuf_we) begin
          check(abuf_wsel, "write-back select");
          check(int'(abuf_waddr) == 500 + wr_i, "write-back addr");
          check(pend_last.size() > 0 && pend_last[0] == cyc - 2, "write-back 2 cycles after last read");
          if (pend_last.size() > 0) void'(pend_last.pop_front());
          wr_i++;
          last_wr = cyc;
        end
        pend_en = wbuf_re; pend_clr = wbuf_re && (n % 3 == 0);
        if (wbuf_re) begin
          if (first_rd < 0) first_rd = cyc;
          check(abuf_re, "activation read with weight read");
          check(int'(wbuf_raddr) == n % 3, "weight read addr");
          check(int'(abuf_raddr) == 10 + (n / 3) * 2 + n % 3, "activation read addr");
          if (n % 3 == 2) pend_last.push_back(cyc);
          n++;
        end
      end
    end
    check(n == 9 && wr_i == 3, "compute counts");
    check(last_wr - first_rd == 9 + 1, $sformatf("compute latency %0d", last_wr - first_rd));

    // ---------------- STORE_A ----------------
    c = '0; c.op = OP_STORE_A; c.addr = 200; c.len = 6;
    send(c);
    begin
      int rd, pushes, cnt;
      bit pend;
      rd = 0; pushes = 0; cnt = 0; pend = 0;
      for (int k = 0; k < 80; k++) begin
        @(negedge clk);
        check(a_out_push == pend, "push one cycle after read");
        if (a_out_push) begin
          pushes++;
          check(cnt < FD, "push into full FIFO");
        end
        pend = abuf_re;
        if (abuf_re) begin
          check(int'(abuf_raddr) == 200 + rd, "store read addr");
          rd++;
        end
        // model the FIFO: push now, random pop, slow consumer at first
        cnt += a_out_push;
        if (cnt > 0 && k > 20 && ($urandom % 2)) cnt--;
        @(posedge clk); #1 a_out_count = CW'(cnt);
      end
      check(rd == 6 && pushes == 6, $sformatf("store counts rd=%0d push=%0d", rd, pushes));
      check(!busy, "idle at the end");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
