// tb_custom_net_aging: duty-cycle workload on the full-size accelerator.
//
// Repeats the weight traffic of 100 inferences of a small CNN -- two
// convolution layers CONV(16,1,5,5) and CONV(50,16,5,5) and two fully
// connected layers FC(256,800) and FC(10,256) -- through the accelerator,
// with a random bit generator biased to 70 % ones. Each layer is one weight
// block: its filters are grouped in sets of F = 8 and every weight word holds
// 8 consecutive weights of each of the 8 filters of a set (unused filters and
// tail positions are zero). In int8 the layers need 8, 350, 3200 and 64
// words; in float32 the FC(256,800) layer needs 12800 words, more than the
// 8192-word memory, and is loaded as two blocks of 6400.
//
// Trained weights are not available, so the weights are synthetic: a sum of
// four uniform numbers (roughly Gaussian) in three storage formats, run one
// after the other, each for 100 inferences:
//   0  symmetric int8: signed, zero at 0, standard deviation ~20 LSB;
//   1  asymmetric int8: the same values plus a zero point of 115, stored as
//      unsigned bytes;
//   2  32-bit IEEE-754 floats, standard deviation ~0.05, 16 per word, packed
//      in filter order (only the weight path is exercised: the processing
//      elements compute in int8).
// All are biased per bit position (sign copies in the high bits, the zero
// point, the exponent field), which is what ages an unprotected memory.
//
// After each block load, the stored bits of the first 128 memory words
// (65536 cells) are sampled; every block is taken to stay in memory for the
// same time. The duty cycle (fraction of samples at '1') of every sampled
// cell is computed for the cells as they are (encoded) and, for comparison,
// for the plain weights that an unprotected memory would hold. Checks, per
// format: each block is stored as weights XOR E; with mitigation every
// sampled cell lies within 0.5 +- 0.1; the unprotected memory has cells
// outside 0.5 +- 0.2 (so the test data is really biased). For the
// symmetric int8 format one output of each layer is also computed and
// checked against the sum of that filter's weights.
module tb_custom_net_aging;
  import dnn_life_pkg::*;
  localparam int F = 8, N = 8, WW = F * N * 8, AWD = N * 8;
  localparam int N_INF = 100, N_LAYERS = 4, SAMPLE_WORDS = 128, N_FMT = 3;
  localparam int N_CELLS = SAMPLE_WORDS * WW;
  localparam int W_MEM_WORDS = 8192;   // default weight-memory depth

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd = '0;
  logic w_in_valid = 0, w_in_ready;
  logic [WW-1:0] w_in_data = '0;
  logic a_in_valid = 0, a_in_ready;
  logic [AWD-1:0] a_in_data = '0;
  logic a_out_valid, a_out_ready = 1;
  logic [AWD-1:0] a_out_data;
  logic aging_e;
  logic [M_BITS-1:0] aging_block_cnt;

  dnn_life_accel #(.TRBG_BIAS_PERMIL(700)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_e1 = 0, n_blocks = 0;

  // layer geometry: filters, weights per filter
  int n_filt [N_LAYERS] = '{16, 50, 256, 10};
  int n_wpf  [N_LAYERS] = '{25, 400, 800, 256};
  int n_words[N_LAYERS];
  logic [WW-1:0] wts [N_LAYERS][];

  // per-cell ones counts (stored and plain)
  shortint unsigned ones_enc [N_CELLS];
  shortint unsigned ones_raw [N_CELLS];
  logic [WW-1:0]    plain_img [SAMPLE_WORDS];   // what an unprotected memory holds

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // roughly Gaussian integer, standard deviation ~20
  function automatic int gauss20();
    int s;
    s = 0;
    for (int k = 0; k < 4; k++) s += int'($urandom % 41) - 20;   // sd ~ 23.7
    return (s * 5) / 6;
  endfunction

  function automatic byte gen_weight();
    int s;
    s = gauss20();
    if (s > 127) s = 127;
    if (s < -127) s = -127;
    return byte'(s);
  endfunction

  task automatic build_layers(input int fmt);
    for (int l = 0; l < N_LAYERS; l++) begin
      int sets, wps;
      sets = (n_filt[l] + F - 1) / F;
      if (fmt == 2) begin
        // 16 floats per word, weights in filter order
        n_words[l] = (n_filt[l] * n_wpf[l] + 15) / 16;
        wts[l] = new[n_words[l]];
        for (int w = 0; w < n_words[l]; w++)
          for (int k = 0; k < 16; k++) begin
            shortreal v;
            v = (w * 16 + k < n_filt[l] * n_wpf[l]) ? shortreal'(gauss20()) * 0.0025 : 0.0;
            wts[l][w][k*32 +: 32] = $shortrealtobits(v);
          end
        continue;
      end
      wps  = (n_wpf[l] + N - 1) / N;
      n_words[l] = sets * wps;
      wts[l] = new[n_words[l]];
      for (int s = 0; s < sets; s++)
        for (int w = 0; w < wps; w++) begin
          logic [WW-1:0] word;
          word = '0;
          if (fmt == 1) word = {(WW/8){8'd115}};   // asymmetric: padding holds the zero point
          for (int f = 0; f < F; f++)
            for (int i = 0; i < N; i++)
              if (s * F + f < n_filt[l] && w * N + i < n_wpf[l])
                word[(f*N + i)*8 +: 8] = (fmt == 1) ? 8'(int'(gen_weight()) + 115) : gen_weight();
          wts[l][s * wps + w] = word;
        end
    end
  endtask

  task automatic send(input cmd_t c);
    @(posedge clk); #1;
    cmd = c; cmd_valid = 1;
    do @(negedge clk); while (!cmd_ready);
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  // load words [start, start+len) of layer l as one weight block
  task automatic load_block(input int l, input int start, input int len);
    cmd_t c;
    c = '0; c.op = OP_LOAD_W; c.len = CMD_AW'(len);
    @(posedge clk); #1;
    fork
      begin
        for (int i = 0; i < len; i++) begin
          w_in_valid = 1; w_in_data = wts[l][start + i];
          do @(negedge clk); while (!w_in_ready);
          @(posedge clk); #1;
        end
        w_in_valid = 0;
      end
      send(c);
    join
    do @(negedge clk); while (busy);
  endtask

  // one output position of filter set 0 over an all-ones activation vector:
  // each output is the (saturated, shift 4) sum of that filter's weights
  task automatic check_layer_output(input int l);
    cmd_t c;
    logic [AWD-1:0] got;
    c = '0; c.op = OP_LOAD_A; c.addr = 0; c.len = CMD_AW'(n_words[l]);
    @(posedge clk); #1;
    fork
      begin
        for (int i = 0; i < n_words[l]; i++) begin
          a_in_valid = 1; a_in_data = {N{8'sd1}};
          do @(negedge clk); while (!a_in_ready);
          @(posedge clk); #1;
        end
        a_in_valid = 0;
      end
      send(c);
    join
    do @(negedge clk); while (busy);
    c = '0; c.op = OP_COMPUTE; c.addr = 0; c.len = CMD_AW'(n_words[l] / ((n_filt[l] + F - 1) / F));
    c.n_pos = 1; c.out_addr = 500000; c.shift = 4;
    send(c);
    do @(negedge clk); while (busy);
    c = '0; c.op = OP_STORE_A; c.addr = 500000; c.len = 1;
    send(c);
    while (!(a_out_valid && a_out_ready)) @(negedge clk);
    got = a_out_data;
    @(posedge clk); #1;
    do @(negedge clk); while (busy);
    for (int f = 0; f < F; f++) begin
      int s;
      s = 0;
      for (int w = 0; w < n_words[l] / ((n_filt[l] + F - 1) / F); w++)
        for (int i = 0; i < N; i++) s += int'($signed(wts[l][w][(f*N + i)*8 +: 8]));
      s = s >>> 4;
      s = (s > 127) ? 127 : (s < -128) ? -128 : s;
      check($signed(got[f*8 +: 8]) == s, $sformatf("layer %0d filter %0d output", l, f));
    end
  endtask

  task automatic sample_cells();
    for (int w = 0; w < SAMPLE_WORDS; w++) begin
      logic [WW-1:0] st;
      st = dut.u_wbuf.mem[w];
      for (int b = 0; b < WW; b++) begin
        ones_enc[w*WW + b] += shortint'(st[b]);
        ones_raw[w*WW + b] += shortint'(plain_img[w][b]);
      end
    end
  endtask

  initial begin : watchdog
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string fmt_name [N_FMT] = '{"symmetric int8", "asymmetric int8", "float32"};

  initial begin
    int bad_enc, bad_raw;
    real dmin_e, dmax_e, dmin_r, dmax_r, d;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    for (int fmt = 0; fmt < N_FMT; fmt++) begin
      build_layers(fmt);
      n_blocks = 0; n_e1 = 0;
      for (int c = 0; c < N_CELLS; c++) begin ones_enc[c] = 0; ones_raw[c] = 0; end
      for (int w = 0; w < SAMPLE_WORDS; w++) plain_img[w] = dut.u_wbuf.mem[w] ^ {WW{aging_e}};
      $display("%s: layer words %0d %0d %0d %0d", fmt_name[fmt],
               n_words[0], n_words[1], n_words[2], n_words[3]);

      for (int inf = 0; inf < N_INF; inf++) begin
        for (int l = 0; l < N_LAYERS; l++) begin
          // a layer larger than the weight memory is split into equal blocks
          int nblk, blen;
          nblk = (n_words[l] + W_MEM_WORDS - 1) / W_MEM_WORDS;
          blen = (n_words[l] + nblk - 1) / nblk;
          for (int b = 0; b < nblk; b++) begin
            int st, ln;
            st = b * blen;
            ln = (st + blen > n_words[l]) ? n_words[l] - st : blen;
            load_block(l, st, ln);
            n_blocks++;
            n_e1 += aging_e;
            for (int w = 0; w < ln && w < SAMPLE_WORDS; w++) plain_img[w] = wts[l][st + w];
            if (inf < 2) begin
              for (int w = 0; w < ln; w++)
                check(dut.u_wbuf.mem[w] == (wts[l][st + w] ^ {WW{aging_e}}),
                      "stored block = weights XOR E");
              if (inf == 0 && fmt == 0) check_layer_output(l);
            end
            sample_cells();
          end
        end
      end

      bad_enc = 0; bad_raw = 0;
      dmin_e = 1.0; dmax_e = 0.0; dmin_r = 1.0; dmax_r = 0.0;
      for (int c = 0; c < N_CELLS; c++) begin
        d = real'(ones_enc[c]) / n_blocks;
        if (d < dmin_e) dmin_e = d;
        if (d > dmax_e) dmax_e = d;
        if (d < 0.4 || d > 0.6) bad_enc++;
        d = real'(ones_raw[c]) / n_blocks;
        if (d < dmin_r) dmin_r = d;
        if (d > dmax_r) dmax_r = d;
        if (d < 0.3 || d > 0.7) bad_raw++;
      end
      $display("%s: blocks=%0d, E=1 in %0d, cells=%0d", fmt_name[fmt], n_blocks, n_e1, N_CELLS);
      $display("  with mitigation: duty cycle %0.3f..%0.3f, cells outside 0.4..0.6: %0d",
               dmin_e, dmax_e, bad_enc);
      $display("  unprotected    : duty cycle %0.3f..%0.3f, cells outside 0.3..0.7: %0d",
               dmin_r, dmax_r, bad_raw);
      check(bad_enc == 0, $sformatf("%s: mitigated duty cycles within 0.5 +- 0.1", fmt_name[fmt]));
      check(bad_raw > 0, $sformatf("%s: unprotected memory is unbalanced", fmt_name[fmt]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
