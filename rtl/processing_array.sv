// processing_array: f processing elements sharing one set of activations.
//
// Every PE receives the same N input activations and its own N weights (one
// filter each), so the array performs N multiplications for f filters per
// cycle and outputs f partial sums, one per filter. The sharing of
// activations across f = 8 PEs follows the source design; the placement of
// the filters inside the weight word is this design's choice.
//
// Interface: act is one activation-memory word (N lanes); wgt is one decoded
// weight-memory word, PE p taking bits [p*N*W_BITS +: N*W_BITS]; psum packs the
// f signed sums, PE p in bits [p*S_BITS +: S_BITS]. Purely combinational.
module processing_array #(
  parameter int unsigned F      = 8,
  parameter int unsigned N      = 8,
  parameter int unsigned A_BITS = 8,
  parameter int unsigned W_BITS = 8,
  localparam int unsigned S_BITS = A_BITS + W_BITS + $clog2(N)
) (
  input  logic [N*A_BITS-1:0]   act,
  input  logic [F*N*W_BITS-1:0] wgt,
  output logic [F*S_BITS-1:0]   psum
);

  for (genvar p = 0; p < int'(F); p++) begin : g_pe
    processing_element #(
      .N(N), .A_BITS(A_BITS), .W_BITS(W_BITS)
    ) u_pe (
      .act (act),
      .wgt (wgt[p*N*W_BITS +: N*W_BITS]),
      .sum (psum[p*S_BITS +: S_BITS])
    );
  end

endmodule
