// processing_element: one PE of the processing array.
//
// N multipliers, each multiplying one shared input activation with one weight
// of this PE's filter, followed by an adder tree that sums the N products.
// Operands are signed 8-bit integers (symmetric quantisation); the sum is
// widened by log2(N) bits so it cannot overflow. The tree is balanced and
// needs N to be a power of two. Multipliers feeding an adder tree, N = 8 per
// PE, follow the source design; the signed 8-bit operands and the purely
// combinational (unpipelined) tree are this design's choice.
//
// Interface: act and wgt are packed vectors of N signed lanes (lane i in bits
// [i*W +: W]); sum is the signed dot product. Purely combinational.
module processing_element #(
  parameter int unsigned N      = 8,
  parameter int unsigned A_BITS = 8,
  parameter int unsigned W_BITS = 8,
  localparam int unsigned LEVELS = $clog2(N),
  localparam int unsigned S_BITS = A_BITS + W_BITS + LEVELS
) (
  input  logic [N*A_BITS-1:0]      act,
  input  logic [N*W_BITS-1:0]      wgt,
  output logic signed [S_BITS-1:0] sum
);

  if ((1 << LEVELS) != N) begin : g_bad_n
    $error("processing_element: N must be a power of two");
  end

  // node[l][i]: i-th partial sum at tree level l (level 0 = products)
  logic signed [S_BITS-1:0] node [LEVELS+1][N];

  always_comb begin
    for (int l = 0; l <= int'(LEVELS); l++) begin
      for (int i = 0; i < int'(N); i++) node[l][i] = '0;
    end
    for (int i = 0; i < int'(N); i++) begin
      node[0][i] = S_BITS'($signed(act[i*A_BITS +: A_BITS]) * $signed(wgt[i*W_BITS +: W_BITS]));
    end
    for (int l = 1; l <= int'(LEVELS); l++) begin
      for (int i = 0; i < int'(N >> l); i++) begin
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
      end
    end
    sum = node[LEVELS][0];
  end

endmodule
