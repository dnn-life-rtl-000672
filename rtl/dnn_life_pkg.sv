// dnn_life_pkg: sizes, types and the command format shared by the
// aging-mitigated DNN accelerator.
//
// The sizes follow the baseline accelerator: f = 8 processing elements of
// N = 8 multipliers each, a 512 KB weight memory and a 4 MB activation
// memory, and an M = 4 bit bias-balancing register in the aging controller.
// Weights and activations are 8-bit signed integers (the symmetric 8-bit
// quantisation case). One weight-memory word holds the f x N weights that the
// processing array consumes in one cycle (512 bits); one activation word holds
// the N activations it consumes in one cycle (64 bits). The word widths, the
// 32-bit accumulators and the command format are choices of this design.
package dnn_life_pkg;

  // Processing array geometry
  localparam int unsigned F_PE      = 8;   // processing elements (filters in parallel)
  localparam int unsigned N_MUL     = 8;   // multipliers per PE (activations in parallel)
  localparam int unsigned WGT_BITS  = 8;   // weight width
  localparam int unsigned ACT_BITS  = 8;   // activation width
  localparam int unsigned ACC_BITS  = 32;  // accumulator width

  // On-chip memories
  localparam int unsigned WMEM_BYTES = 512 * 1024;
  localparam int unsigned AMEM_BYTES = 4 * 1024 * 1024;
  localparam int unsigned W_WORD_BITS = F_PE * N_MUL * WGT_BITS;         // 512
  localparam int unsigned A_WORD_BITS = N_MUL * ACT_BITS;                // 64
  localparam int unsigned W_DEPTH_DEF = WMEM_BYTES * 8 / W_WORD_BITS;        // 8192
  localparam int unsigned A_DEPTH_DEF = AMEM_BYTES * 8 / A_WORD_BITS;        // 524288

  // Aging mitigation controller
  localparam int unsigned M_BITS = 4;      // bias-balancing register width

  // Command interface of the control unit
  localparam int unsigned CMD_AW = 24;     // width of every address/count field

  typedef enum logic [1:0] {
    OP_LOAD_W  = 2'd0,   // new weight block: off-chip -> WDE -> weight memory
    OP_LOAD_A  = 2'd1,   // input activations: off-chip -> activation memory
    OP_COMPUTE = 2'd2,   // weight block x activations -> output activations
    OP_STORE_A = 2'd3    // activation memory -> off-chip
  } op_e;

  typedef struct packed {
    op_e               op;
    logic [CMD_AW-1:0] addr;     // activation address (LOAD_A/STORE_A), input base (COMPUTE)
    logic [CMD_AW-1:0] len;      // words to move, or weight words per output (COMPUTE)
    logic [CMD_AW-1:0] stride;   // COMPUTE: input address step between output positions
    logic [CMD_AW-1:0] n_pos;    // COMPUTE: number of output positions
    logic [CMD_AW-1:0] out_addr; // COMPUTE: activation address of the first output word
    logic [4:0]        shift;    // COMPUTE: right shift applied before saturation to 8 bits
  } cmd_t;

endpackage
