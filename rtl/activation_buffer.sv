// activation_buffer: on-chip activation memory.
//
// Large enough for the activations of one DNN layer: DEPTH words of WIDTH
// bits, by default 524288 words of 64 bits = 4 MB. One word is the N = 8
// 8-bit activations that the processing array shares in one cycle. It is
// filled from the input-activation stream, read by the processing array,
// written with output activations from the accumulation unit and read out to
// the output-activation stream.
//
// Interface: one write port (we, waddr, wdata), one read port (re, raddr,
// rdata); synchronous read with one cycle of latency, rdata held while re is
// low, read-during-write of one address returns the old word. Port structure
// and latency are this design's choice; the paper gives the size and the N
// activations per cycle.
module activation_buffer #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 524288,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
