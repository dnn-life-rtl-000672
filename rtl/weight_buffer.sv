// weight_buffer: on-chip weight memory (6T-SRAM in silicon).
//
// Holds one block of weights at a time: DEPTH words of WIDTH bits, by default
// 8192 words of 512 bits = 512 KB, each word being the f x N = 64 8-bit
// weights the processing array consumes in one cycle. It is written only
// through the Write Data Encoder and read only through the Read Data Decoder,
// so the cells hold encoded data; the memory itself is an ordinary array and
// needs no change for aging mitigation.
//
// Interface: one write port (we, waddr, wdata) and one read port (re, raddr,
// rdata). Writes take effect at the rising edge. Reads are synchronous with a
// latency of one cycle; rdata holds its value while re is low. A read of the
// address being written in the same cycle returns the old word. The separate
// ports and the latency are this design's choice; the paper gives only the
// size and the f x N words per cycle.
module weight_buffer #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 8192,
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
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
