// dnn_life_accel: DNN accelerator with aging-mitigated weight memory (top).
//
// A dense DNN accelerator -- weight FIFO, input- and output-activation FIFOs,
// activation memory, weight memory, an array of F processing elements of N
// multipliers each, an accumulation unit and a control unit -- with the three
// aging-mitigation parts around the weight memory:
//   off-chip weights -> FIFO -> WDE (XOR with E) -> weight memory
//   weight memory -> RDD (XOR with the same E) -> processing array
//   TRBG -> aging controller -> E, drawn afresh on every New Data Block pulse.
// Because every block is stored either plainly or inverted, at random and
// with the generator's bias cancelled, each memory cell sees about half of
// its lifetime '1' whatever the weight values are. Dataflow and memory
// mapping are untouched: the decoder returns exactly the weights written.
//
// Interface (all plain signals): a command port (cmd_t, see control_unit for
// the four operations), three valid/ready streams standing for the off-chip
// DRAM side of the FIFOs, `busy`, and two observation outputs: `aging_e`, the
// current encode bit, and `aging_block_cnt`, the bias-balancing counter. One
// weight word = F x N signed 8-bit weights (filter p in bits [p*N*8 +: N*8]);
// one activation word = N signed 8-bit activations. Output activations are
// written as one word holding the F results, so F must equal N.
// TRBG_BIAS_PERMIL only affects the behavioural random bit generator.
//
// Timing: a weight block streams in at up to one word per cycle; a COMPUTE
// of len words and n_pos positions takes len*n_pos + 3 cycles from command
// acceptance to idle. What follows the paper: the block structure of Fig. 4a,
// the XOR encoder/decoder, the controller structure, f = N = 8, M = 4 and the
// memory sizes. This design's own: word widths, FIFOs, commands, latencies,
// 32-bit accumulation and the shift-and-saturate output stage.
module dnn_life_accel
  import dnn_life_pkg::*;
#(
  parameter int unsigned F                = F_PE,
  parameter int unsigned N                = N_MUL,
  parameter int unsigned W_DEPTH          = W_DEPTH_DEF,
  parameter int unsigned A_DEPTH          = A_DEPTH_DEF,
  parameter int unsigned M                = M_BITS,
  parameter int unsigned FIFO_DEPTH       = 4,
  parameter int unsigned TRBG_BIAS_PERMIL = 500,
  localparam int unsigned WW     = F * N * WGT_BITS,
  localparam int unsigned AWD    = N * ACT_BITS,
  localparam int unsigned S_BITS = ACT_BITS + WGT_BITS + $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  cmd_t           cmd,
  output logic           busy,
  // weights from off-chip memory
  input  logic           w_in_valid,
  output logic           w_in_ready,
  input  logic [WW-1:0]  w_in_data,
  // input activations from off-chip memory
  input  logic           a_in_valid,
  output logic           a_in_ready,
  input  logic [AWD-1:0] a_in_data,
  // output activations to off-chip memory
  output logic           a_out_valid,
  input  logic           a_out_ready,
  output logic [AWD-1:0] a_out_data,
  // aging mitigation status
  output logic           aging_e,
  output logic [M-1:0]   aging_block_cnt
);

  if (F != N) begin : g_bad_fn
    $error("dnn_life_accel: output word packing needs F == N");
  end

  localparam int unsigned WAW = $clog2(W_DEPTH);
  localparam int unsigned AAW = $clog2(A_DEPTH);
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1);

  // FIFO outputs
  logic           wf_valid, wf_ready;
  logic [WW-1:0]  wf_data;
  logic           af_valid, af_ready;
  logic [AWD-1:0] af_data;
  logic [CW-1:0]  of_count;
  logic           of_push, of_ready_unused;

  // control
  logic           new_block, e, trbg_bit;
  logic           wbuf_we, wbuf_re, abuf_we, abuf_re, abuf_wsel;
  logic [WAW-1:0] wbuf_waddr, wbuf_raddr;
  logic [AAW-1:0] abuf_waddr, abuf_raddr;
  logic           acc_en, acc_clear;
  logic [4:0]     shift;

  // datapath
  logic [WW-1:0]       w_enc, w_mem, w_dec;
  logic [AWD-1:0]      a_mem, a_res, abuf_wdata;
  logic [F*S_BITS-1:0] psum;

  stream_fifo #(.WIDTH(WW), .DEPTH(FIFO_DEPTH)) u_wfifo (
    .clk, .rst_n,
    .in_valid (w_in_valid), .in_ready (w_in_ready), .in_data (w_in_data),
    .out_valid(wf_valid),   .out_ready(wf_ready),   .out_data(wf_data),
    .count    ()
  );

  stream_fifo #(.WIDTH(AWD), .DEPTH(FIFO_DEPTH)) u_afifo (
    .clk, .rst_n,
    .in_valid (a_in_valid), .in_ready (a_in_ready), .in_data (a_in_data),
    .out_valid(af_valid),   .out_ready(af_ready),   .out_data(af_data),
    .count    ()
  );

  stream_fifo #(.WIDTH(AWD), .DEPTH(FIFO_DEPTH)) u_ofifo (
    .clk, .rst_n,
    .in_valid (of_push),     .in_ready (of_ready_unused), .in_data (a_mem),
    .out_valid(a_out_valid), .out_ready(a_out_ready),     .out_data(a_out_data),
    .count    (of_count)
  );

  control_unit #(.W_DEPTH(W_DEPTH), .A_DEPTH(A_DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .busy,
    .w_in_valid (wf_valid), .w_in_ready (wf_ready),
    .new_block,
    .wbuf_we, .wbuf_waddr,
    .a_in_valid (af_valid), .a_in_ready (af_ready),
    .abuf_we, .abuf_waddr, .abuf_wsel,
    .wbuf_re, .wbuf_raddr, .abuf_re, .abuf_raddr,
    .acc_en, .acc_clear, .shift,
    .a_out_count(of_count), .a_out_push(of_push)
  );

  trbg #(.BIAS_PERMIL(TRBG_BIAS_PERMIL)) u_trbg (
    .clk, .rst_n, .bit_o(trbg_bit)
  );

  aging_controller #(.M(M)) u_aging (
    .clk, .rst_n, .trbg_bit, .new_block, .e, .block_cnt(aging_block_cnt)
  );

  wde #(.WIDTH(WW)) u_wde (.e, .din(wf_data), .dout(w_enc));

  weight_buffer #(.WIDTH(WW), .DEPTH(W_DEPTH)) u_wbuf (
    .clk, .we(wbuf_we), .waddr(wbuf_waddr), .wdata(w_enc),
    .re(wbuf_re), .raddr(wbuf_raddr), .rdata(w_mem)
  );

  rdd #(.WIDTH(WW)) u_rdd (.e, .din(w_mem), .dout(w_dec));

  assign abuf_wdata = abuf_wsel ? a_res : af_data;

  activation_buffer #(.WIDTH(AWD), .DEPTH(A_DEPTH)) u_abuf (
    .clk, .we(abuf_we), .waddr(abuf_waddr), .wdata(abuf_wdata),
    .re(abuf_re), .raddr(abuf_raddr), .rdata(a_mem)
  );

  processing_array #(.F(F), .N(N), .A_BITS(ACT_BITS), .W_BITS(WGT_BITS)) u_pa (
    .act(a_mem), .wgt(w_dec), .psum
  );

  accumulation_unit #(.F(F), .S_BITS(S_BITS), .ACC(ACC_BITS), .O_BITS(ACT_BITS)) u_acc (
    .clk, .rst_n, .en(acc_en), .clear(acc_clear), .psum, .shift,
    .acc(), .act_out(a_res)
  );

  assign aging_e = e;

  // The output FIFO is never pushed while full (the control unit reserves room)
  a_ofifo_room: assert property (@(posedge clk) disable iff (!rst_n) of_push |-> of_ready_unused);

endmodule
