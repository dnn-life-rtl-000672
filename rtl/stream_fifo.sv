// stream_fifo: small synchronous FIFO for the off-chip streams.
//
// Three of these decouple the accelerator from off-chip memory: weights in,
// input activations in, output activations out. Valid/ready handshake on both
// sides: a word moves when valid and ready are both high at a rising edge.
// in_ready is high while the FIFO is not full; out_valid while it is not
// empty, with out_data the oldest word (first-word fall-through). A push and a
// pop in the same cycle are allowed when full. `count` tells a producer that
// must reserve space ahead of time how many words are stored. The paper only
// draws the FIFOs; depth and handshake are this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic [CW-1:0]    cnt;
  logic             push, pop;

  assign out_valid = (cnt != '0);
  assign in_ready  = (cnt != CW'(DEPTH)) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];
  assign count     = cnt;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      cnt <= cnt + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // The stored count can never exceed DEPTH
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n) cnt <= CW'(DEPTH));
  // Data offered to the consumer stays put until it is taken
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
