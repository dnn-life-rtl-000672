// control_unit: command sequencer and address generator of the accelerator.
//
// Executes one command at a time from a valid/ready command port (cmd_t in
// dnn_life_pkg). The paper names this unit and describes the dataflow it
// serves -- filters cut into blocks of r x c x ch x f weights, each block
// loaded once into the weight memory and then used for all the computation
// that needs it -- but not its insides; the command set below is this
// design's own, kept to what that dataflow needs:
//
//  OP_LOAD_W  (len)   Loads a new weight block. Pulses new_block for one cycle,
//                     so the aging controller draws a fresh E, then pops len
//                     words from the weight FIFO into weight addresses
//                     0..len-1 (through the encoder), one per cycle while the
//                     FIFO has data.
//  OP_LOAD_A  (addr, len)  Pops len words from the input-activation FIFO into
//                     activation addresses addr..addr+len-1.
//  OP_COMPUTE (addr, len, stride, n_pos, out_addr, shift)  For each output
//                     position p < n_pos, streams weight words 0..len-1 and
//                     activation words addr+p*stride+i, one pair per cycle,
//                     into the processing array; the accumulation unit sums
//                     them (clear on the first word) and the requantised f
//                     outputs are written to activation address out_addr+p.
//                     Positions follow each other without bubbles.
//  OP_STORE_A (addr, len)  Reads activation words addr..addr+len-1 into the
//                     output FIFO, one per cycle while it has room.
//
// Pipeline timing of COMPUTE: cycle t issues the two reads; in t+1 the
// memory data pass decoder and processing array and acc_en/acc_clear are
// high; in t+2 (after the last word of a position) the finished outputs are
// written back. Store reads are issued only when the output FIFO, counting
// the word still in flight, has a free place, so the FIFO never overflows.
module control_unit
  import dnn_life_pkg::*;
#(
  parameter int unsigned W_DEPTH    = W_DEPTH_DEF,
  parameter int unsigned A_DEPTH    = A_DEPTH_DEF,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned WAW = $clog2(W_DEPTH),
  localparam int unsigned AAW = $clog2(A_DEPTH),
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // command port
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  cmd_t           cmd,
  output logic           busy,
  // weight stream and weight memory write side
  input  logic           w_in_valid,
  output logic           w_in_ready,
  output logic           new_block,
  output logic           wbuf_we,
  output logic [WAW-1:0] wbuf_waddr,
  // input-activation stream
  input  logic           a_in_valid,
  output logic           a_in_ready,
  // activation memory write side
  output logic           abuf_we,
  output logic [AAW-1:0] abuf_waddr,
  output logic           abuf_wsel,     // 0: input stream, 1: computed outputs
  // memory read sides
  output logic           wbuf_re,
  output logic [WAW-1:0] wbuf_raddr,
  output logic           abuf_re,
  output logic [AAW-1:0] abuf_raddr,
  // accumulation unit
  output logic           acc_en,
  output logic           acc_clear,
  output logic [4:0]     shift,
  // output-activation stream
  input  logic [CW-1:0]  a_out_count,
  output logic           a_out_push
);

  typedef enum logic [2:0] {S_IDLE, S_NEWBLK, S_LOADW, S_LOADA, S_COMP, S_STORE, S_DRAIN} state_e;

  state_e            state;
  cmd_t              cq;
  logic [CMD_AW-1:0] cnt;        // word index within len
  logic [CMD_AW-1:0] pos;        // output position (COMPUTE)
  logic [CMD_AW-1:0] pos_base;   // input address of the current position
  logic [CMD_AW-1:0] out_ptr;    // next output address (COMPUTE write-back)
  // COMPUTE pipeline
  logic              c1_valid, c1_first, c1_last;
  logic              c2_write;
  // STORE pipeline
  logic              st1_valid;

  logic comp_issue, store_issue, loadw_take, loada_take;
  logic last_word, last_pos;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  assign last_word   = (cnt == cq.len - 1'b1);
  assign last_pos    = (pos == cq.n_pos - 1'b1);
  assign comp_issue  = (state == S_COMP);
  assign store_issue = (state == S_STORE) &&
                       ((32'(a_out_count) + 32'(st1_valid)) < FIFO_DEPTH);
  assign loadw_take  = (state == S_LOADW) && w_in_valid;
  assign loada_take  = (state == S_LOADA) && a_in_valid;

  // Stream handshakes
  assign w_in_ready = (state == S_LOADW);
  assign a_in_ready = (state == S_LOADA);
  assign new_block  = (state == S_NEWBLK);

  // Weight memory
  assign wbuf_we    = loadw_take;
  assign wbuf_waddr = WAW'(cnt);
  assign wbuf_re    = comp_issue;
  assign wbuf_raddr = WAW'(cnt);

  // Activation memory
  assign abuf_re    = comp_issue || store_issue;
  assign abuf_raddr = comp_issue ? AAW'(pos_base + cnt) : AAW'(cq.addr + cnt);
  assign abuf_we    = loada_take || c2_write;
  assign abuf_wsel  = c2_write;
  assign abuf_waddr = c2_write ? AAW'(out_ptr) : AAW'(cq.addr + cnt);

  // Accumulation unit
  assign acc_en    = c1_valid;
  assign acc_clear = c1_first;
  assign shift     = cq.shift;

  assign a_out_push = st1_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cq        <= '0;
      cnt       <= '0;
      pos       <= '0;
      pos_base  <= '0;
      out_ptr   <= '0;
      c1_valid  <= 1'b0;
      c1_first  <= 1'b0;
      c1_last   <= 1'b0;
      c2_write  <= 1'b0;
      st1_valid <= 1'b0;
    end else begin
      // pipelines
      c1_valid  <= comp_issue;
      c1_first  <= comp_issue && (cnt == '0);
      c1_last   <= comp_issue && last_word;
      c2_write  <= c1_valid && c1_last;
      st1_valid <= store_issue;
      if (c2_write) out_ptr <= out_ptr + 1'b1;

      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            cq       <= cmd;
            cnt      <= '0;
            pos      <= '0;
            pos_base <= cmd.addr;
            out_ptr  <= cmd.out_addr;
            unique case (cmd.op)
              OP_LOAD_W:  state <= S_NEWBLK;
              OP_LOAD_A:  state <= (cmd.len == '0) ? S_IDLE : S_LOADA;
              OP_COMPUTE: state <= (cmd.len == '0 || cmd.n_pos == '0) ? S_IDLE : S_COMP;
              OP_STORE_A: state <= (cmd.len == '0) ? S_IDLE : S_STORE;
              default:    state <= S_IDLE;
            endcase
          end
        end
        S_NEWBLK: state <= (cq.len == '0) ? S_IDLE : S_LOADW;
        S_LOADW: if (loadw_take) begin
          cnt <= cnt + 1'b1;
          if (last_word) state <= S_IDLE;
        end
        S_LOADA: if (loada_take) begin
          cnt <= cnt + 1'b1;
          if (last_word) state <= S_IDLE;
        end
        S_COMP: begin
          if (last_word) begin
            cnt      <= '0;
            pos      <= pos + 1'b1;
            pos_base <= pos_base + cq.stride;
            if (last_pos) state <= S_DRAIN;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_STORE: if (store_issue) begin
          cnt <= cnt + 1'b1;
          if (last_word) state <= S_DRAIN;
        end
        S_DRAIN: if (!c1_valid && !c2_write && !st1_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A store word is pushed only into a FIFO with room for it
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  a_out_push |-> 32'(a_out_count) < FIFO_DEPTH);
  // The two writers of the activation memory never collide
  a_abuf_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
                                      !(loada_take && c2_write));

endmodule
