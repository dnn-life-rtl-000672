// aging_controller: Aging Mitigation Controller.
//
// Produces the 1-bit enable E that tells the encoder and decoder whether the
// current weight block is stored inverted. Following the paper's structure:
//  * a random bit from the TRBG is XORed with the most significant (M-th) bit
//    of an M-bit register;
//  * the M-bit register and an adder count the New Data Block pulses, so its
//    top bit flips every 2^(M-1) blocks and the TRBG output is inverted for
//    half of all blocks, cancelling any bias of the generator;
//  * a 2:1 multiplexer selected by the New Data Block signal feeds the 1-bit
//    E register: on a new block it takes the XOR result, otherwise it keeps
//    its own value, so E is constant for the whole life of a block in memory.
// Reset values (counter 0, E 0) are this design's choice.
//
// Timing: new_block is a one-cycle pulse; E and block_cnt take their new
// values at the same rising edge, so E is valid from the next cycle on. The
// XOR uses the counter value from before that edge.
module aging_controller #(
  parameter int unsigned M = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         trbg_bit,   // random bit from the TRBG
  input  logic         new_block,  // New Data Block signal, one-cycle pulse
  output logic         e,          // encode/decode enable (metadata)
  output logic [M-1:0] block_cnt   // bias-balancing register, for observation
);

  logic [M-1:0] cnt_q, cnt_d;
  logic         e_q, e_d, rnd;

  always_comb begin
    cnt_d = cnt_q + M'(new_block);          // adder: register + New Data Block
    rnd   = trbg_bit ^ cnt_q[M-1];          // bias balancing inversion
    e_d   = new_block ? rnd : e_q;          // mux: 1 -> new bit, 0 -> hold
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      e_q   <= 1'b0;
    end else begin
      cnt_q <= cnt_d;
      e_q   <= e_d;
    end
  end

  assign e         = e_q;
  assign block_cnt = cnt_q;

endmodule
