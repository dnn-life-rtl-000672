// accumulation_unit: one adder and one register per PE.
//
// Adds each PE's sum to that filter's running partial sum. A filter block
// larger than one weight word takes several cycles per output, so the
// register accumulates until the last word. On `clear` the register is loaded
// with the incoming sum instead of adding it, which starts a new output
// without a separate clearing cycle.
//
// The accumulated values are also offered as output activations: each is
// arithmetically shifted right by `shift` and saturated to a signed O_BITS
// value, and the f results are packed into one word (lane p = filter p). The
// shift-and-saturate requantisation is this design's choice; the paper does
// not say how the 8-bit output activations are formed.
//
// Timing: with en high, acc takes the new value at the rising edge; act_out
// is a combinational function of acc and shift.
module accumulation_unit #(
  parameter int unsigned F      = 8,
  parameter int unsigned S_BITS = 19,
  parameter int unsigned ACC    = 32,
  parameter int unsigned O_BITS = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clear,
  input  logic [F*S_BITS-1:0]  psum,
  input  logic [4:0]           shift,
  output logic [F*ACC-1:0]     acc,
  output logic [F*O_BITS-1:0]  act_out
);

  localparam logic signed [ACC-1:0] OMAX = ACC'((1 << (O_BITS - 1)) - 1);
  localparam logic signed [ACC-1:0] OMIN = -ACC'(1 << (O_BITS - 1));

  logic signed [ACC-1:0] acc_q [F];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < int'(F); p++) acc_q[p] <= '0;
    end else if (en) begin
      for (int p = 0; p < int'(F); p++) begin
        acc_q[p] <= (clear ? '0 : acc_q[p])
                  + ACC'($signed(psum[p*S_BITS +: S_BITS]));
      end
    end
  end

  always_comb begin
    logic signed [ACC-1:0] sh;
    for (int p = 0; p < int'(F); p++) begin
      acc[p*ACC +: ACC] = acc_q[p];
      sh = acc_q[p] >>> shift;
      if (sh > OMAX)      act_out[p*O_BITS +: O_BITS] = OMAX[O_BITS-1:0];
      else if (sh < OMIN) act_out[p*O_BITS +: O_BITS] = OMIN[O_BITS-1:0];
      else                act_out[p*O_BITS +: O_BITS] = sh[O_BITS-1:0];
    end
  end

endmodule
