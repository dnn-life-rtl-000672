// wde: Write Data Encoder.
//
// Sits between the off-chip weight stream and the on-chip weight memory.
// Every bit of the incoming word passes through its own XOR gate whose other
// input is the 1-bit enable E from the aging mitigation controller: with E = 0
// the word is written unchanged, with E = 1 it is written inverted. One XOR per
// bit is the structure the paper gives; its width simply follows the memory
// word. The default width of 64 bits is the width the paper synthesised; the
// accelerator top uses the full weight-memory word.
//
// Interface: din (WIDTH bits), e, dout (WIDTH bits). Purely combinational,
// no clock: the encoded word is valid in the same cycle as din.
module wde #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             e,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  always_comb begin
    for (int unsigned i = 0; i < WIDTH; i++) begin
      dout[i] = din[i] ^ e;
    end
  end

endmodule
