// rdd: Read Data Decoder.
//
// Sits between the on-chip weight memory and the processing array and undoes
// the Write Data Encoder. Its structure is the same inverter switch as the
// encoder, one XOR gate per bit, driven by the same enable E that was used when
// the block was written: a word stored inverted is inverted back, a word stored
// plainly passes unchanged. Since the weight memory holds one block at a time
// and E changes only when a new block is loaded, the single E bit held in the
// aging controller is the whole of the metadata the decoder needs.
//
// Interface: din (WIDTH bits, the memory read data), e, dout (decoded weights).
// Purely combinational. Default width 64 bits as in the encoder.
module rdd #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             e,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  // Invert-back mask, then one XOR per bit
  logic [WIDTH-1:0] mask;

  always_comb begin
    mask = {WIDTH{e}};
    dout = din ^ mask;
  end

endmodule
