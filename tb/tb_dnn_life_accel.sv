// tb_dnn_life_accel: end-to-end test of the accelerator at its default size.
//
// Runs the whole design with every parameter at its default (512 KB weight
// memory of 8192 x 512-bit words, 4 MB activation memory, 8 PEs x 8
// multipliers, M = 4):
//  1. one full-size weight block: LOAD_W of all 8192 words, LOAD_A of 8200
//     activation words, COMPUTE of two output positions over the whole block
//     (8192 cycles each), STORE_A of the results;
//  2. 34 short blocks (16 words) that are each loaded, computed for three
//     positions and stored, so that the bias-balancing counter wraps twice.
// Every weight stream word, activation word and output word is produced or
// checked here: the weight memory contents are compared with the written
// words XOR E (so encoding is checked on the cells themselves), the outputs
// with dot products, shift and saturation computed in the testbench, and the
// COMPUTE time with len*n_pos+3 cycles.
// Mechanisms counted, each must occur: new blocks, blocks stored inverted and
// plainly, blocks with the bias-balancing inversion active, weight-stream
// stalls, output-stream back-pressure, saturated outputs.
module tb_dnn_life_accel;
  import dnn_life_pkg::*;
  localparam int F = 8, N = 8, WW = F * N * 8, AWD = N * 8;
  localparam int WD = 8192;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd = '0;
  logic w_in_valid = 0, w_in_ready;
  logic [WW-1:0] w_in_data = '0;
  logic a_in_valid = 0, a_in_ready;
  logic [AWD-1:0] a_in_data = '0;
  logic a_out_valid, a_out_ready = 0;
  logic [AWD-1:0] a_out_data;
  logic aging_e;
  logic [M_BITS-1:0] aging_block_cnt;

  dnn_life_accel dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_blocks = 0, n_inv = 0, n_plain = 0, n_bal = 0;
  int n_wstall = 0, n_bp = 0, n_sat = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic [WW-1:0]  wref [WD];
  logic [AWD-1:0] aref [int];
  logic [AWD-1:0] outq [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  function automatic logic [WW-1:0] rnd_wword();
    logic [WW-1:0] w;
    for (int i = 0; i < WW / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  // ---------------- stream drivers (inputs change 1 ns after the edge) ---------
  task automatic push_w(input logic [WW-1:0] d);
    if ($urandom % 4 == 0) begin @(posedge clk); #1; end
    w_in_valid = 1; w_in_data = d;
    forever begin
      @(negedge clk);
      if (w_in_ready) break;
      n_wstall++;
    end
    @(posedge clk); #1 w_in_valid = 0;
  endtask

  task automatic push_a(input logic [AWD-1:0] d);
    if ($urandom % 4 == 0) begin @(posedge clk); #1; end
    a_in_valid = 1; a_in_data = d;
    do @(negedge clk); while (!a_in_ready);
    @(posedge clk); #1 a_in_valid = 0;
  endtask

  // output consumer: random ready, collects words
  always @(posedge clk) begin
    if (rst_n && a_out_valid && a_out_ready) outq.push_back(a_out_data);
    #1 a_out_ready = ($urandom % 2) == 0;
  end
  always @(negedge clk) if (a_out_valid && !a_out_ready) n_bp++;

  task automatic send(input cmd_t c);
    @(posedge clk); #1;
    cmd = c; cmd_valid = 1;
    do @(negedge clk); while (!cmd_ready);
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  task automatic wait_idle();
    do @(negedge clk); while (busy);
  endtask

  // ---------------- operations ----------------
  task automatic load_weights(input int len, input bit late_cmd);
    cmd_t c;
    logic [M_BITS-1:0] cnt_before;
    cnt_before = aging_block_cnt;
    for (int i = 0; i < len; i++) wref[i] = rnd_wword();
    c = '0; c.op = OP_LOAD_W; c.len = CMD_AW'(len);
    @(posedge clk); #1;   // drivers start just after an edge
    fork
      for (int i = 0; i < len; i++) push_w(wref[i]);
      begin
        // a late command lets the weight FIFO fill up and stall the stream
        if (late_cmd) repeat (10) @(posedge clk);
        send(c);
      end
    join
    wait_idle();
    n_blocks++;
    if (aging_e) n_inv++; else n_plain++;
    if (cnt_before[M_BITS-1]) n_bal++;
    check(aging_block_cnt == cnt_before + 1'b1, "block counter advanced once");
    // cells hold the words XOR E
    for (int i = 0; i < len; i++)
      check(dut.u_wbuf.mem[i] == (wref[i] ^ {WW{aging_e}}), $sformatf("stored word %0d", i));
  endtask

  task automatic load_acts(input int addr, input int len);
    cmd_t c;
    logic [AWD-1:0] d [];
    d = new[len];
    for (int i = 0; i < len; i++) begin
      d[i] = {$urandom, $urandom};
      aref[addr + i] = d[i];
    end
    c = '0; c.op = OP_LOAD_A; c.addr = CMD_AW'(addr); c.len = CMD_AW'(len);
    @(posedge clk); #1;
    fork
      for (int i = 0; i < len; i++) push_a(d[i]);
      send(c);
    join
    wait_idle();
  endtask

  // expected output word of position p
  function automatic logic [AWD-1:0] expect_out(input int base, input int len, input int shift);
    logic [AWD-1:0] r;
    for (int f = 0; f < F; f++) begin
      longint s;
      int q;
      s = 0;
      for (int i = 0; i < len; i++)
        for (int l = 0; l < N; l++)
          s += longint'($signed(aref[base + i][l*8 +: 8])) *
               longint'($signed(wref[i][(f*N + l)*8 +: 8]));
      s = s >>> shift;
      q = (s > 127) ? 127 : (s < -128) ? -128 : int'(s);
      r[f*8 +: 8] = 8'(q);
    end
    return r;
  endfunction

  task automatic compute_and_check(input int base, input int len, input int stride,
                                   input int npos, input int oaddr, input int shift);
    cmd_t c;
    longint t0;
    logic [AWD-1:0] e;
    c = '0; c.op = OP_COMPUTE; c.addr = CMD_AW'(base); c.len = CMD_AW'(len);
    c.stride = CMD_AW'(stride); c.n_pos = CMD_AW'(npos); c.out_addr = CMD_AW'(oaddr);
    c.shift = 5'(shift);
    send(c);
    t0 = cyc;
    wait_idle();
    // accepted at t0-1; reads start the cycle after; the last write-back lands 2 later
    check(cyc - t0 == longint'(len) * npos + 3, $sformatf("compute time %0d for %0d words",
          cyc - t0, len * npos));
    for (int p = 0; p < npos; p++) begin
      e = expect_out(base + p * stride, len, shift);
      aref[oaddr + p] = e;
    end
    // read back through the output stream
    c = '0; c.op = OP_STORE_A; c.addr = CMD_AW'(oaddr); c.len = CMD_AW'(npos);
    outq.delete();
    send(c);
    wait_idle();
    while (outq.size() < npos) @(negedge clk);
    for (int p = 0; p < npos; p++) begin
      check(outq[p] == aref[oaddr + p], $sformatf("output p=%0d got %h exp %h", p, outq[p], aref[oaddr + p]));
      for (int f = 0; f < F; f++)
        if (outq[p][f*8 +: 8] == 8'h7f || outq[p][f*8 +: 8] == 8'h80) n_sat++;
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(aging_e == 0 && cmd_ready, "reset state");

    // 1. full-size block
    load_weights(WD, 1'b0);
    load_acts(0, WD + 8);
    compute_and_check(0, WD, 8, 2, 100000, 14);
    $display("full block done at cycle %0d, E=%0b", cyc, aging_e);

    // 2. short blocks: counter wraps, E both ways, saturation with small shifts
    for (int b = 0; b < 34; b++) begin
      load_weights(16, b[0]);
      compute_and_check(200 + b, 16, 3, 3, 200000 + 8 * b, (b % 3 == 0) ? 0 : 9);
    end

    $display("blocks=%0d inverted=%0d plain=%0d balancing=%0d wstall=%0d backpressure=%0d saturated=%0d",
             n_blocks, n_inv, n_plain, n_bal, n_wstall, n_bp, n_sat);
    check(n_blocks > 0, "new blocks");
    check(n_inv > 0, "inverted blocks");
    check(n_plain > 0, "plain blocks");
    check(n_bal > 0, "bias balancing inversion active");
    check(n_wstall > 0, "weight stream stall");
    check(n_bp > 0, "output back-pressure");
    check(n_sat > 0, "saturated outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
