// trbg: True Random Bit Generator -- behavioural model, not synthesizable.
//
// In silicon this is a free-running 5-stage ring oscillator whose jittery
// output is sampled by the system clock; that is an analog, process-dependent
// circuit and cannot be written as logic. This model reproduces what the rest
// of the design sees: one fresh random bit per clock edge, with a
// probability of '1' of BIAS_PERMIL / 1000. The default 500 is an unbiased
// source; setting 700 models the biased generator (70 % ones) that the bias
// balancing register in the aging controller is there to correct.
//
// Interface: clk (sampling clock), rst_n (output held at 0 in reset),
// bit_o (registered random bit, changes after each rising edge).
module trbg #(
  parameter int unsigned BIAS_PERMIL = 500
) (
  input  logic clk,
  input  logic rst_n,
  output logic bit_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bit_o <= 1'b0;
    else        bit_o <= (($urandom % 1000) < BIAS_PERMIL);
  end

endmodule
