// hoim_pkg: constants and types shared by the higher-order Ising machine.
//
// The machine keeps one bit per clause (interaction term) T_k of the Ising
// polynomial E(s) = -sum_k J_k prod_{i in clause k} s_i, encodes the clause bits
// into per-variable energy changes (latent neurons), fires the variables whose
// change beats an annealed noise threshold, and toggles every clause that holds
// an odd number of fired variables. Widths printed in the paper's FPGA figure
// (16-bit noise and accumulators, 5-bit weights, 32-bit stream, 16-bit SAT
// count) are fixed here; the configuration command format is this design's own.
package hoim_pkg;

  localparam int NOISE_W  = 16;  // noise threshold mu (signed)
  localparam int ACC_W    = 16;  // latent-neuron accumulator, Csum (signed)
  localparam int W_BITS   = 5;   // clause weight Htilde_{k,i} = J_k (signed)
  localparam int SAT_W    = 16;  // SAT value streamed back each iteration
  localparam int STREAM_W = 32;  // AXI4-Stream data width

  // Configuration commands. Each command is two stream words: a header
  // {op[31:28], idx_a[27:16], idx_b[15:0]} followed by one data word.
  typedef enum logic [3:0] {
    OP_NOP        = 4'd0,
    OP_SET_T      = 4'd1,   // idx_b = word address, data = 32 clause bits
    OP_SET_J      = 4'd2,   // idx_b = clause, data[4:0] = J_k
    OP_SET_MEMBER = 4'd3,   // idx_b = clause, idx_a = slot, data = {valid[31], var[15:0]}
    OP_SET_NEIGH  = 4'd4,   // idx_b = var, idx_a = slot, data = {valid[31], weight[20:16], clause[15:0]}
    OP_SET_VAR    = 4'd5,   // idx_b = var, data = {color[23:16], csum[15:0]}
    OP_SET_LANE   = 4'd6,   // idx_b = var, data[15:0] = noise lane
    OP_SET_NOISE  = 4'd7,   // idx_b = lane, data[15:0] = initial noise sample
    OP_SET_REG    = 4'd8,   // idx_b = register (reg_e), data = value
    OP_RUN        = 4'd9,   // data ignored; following words are noise samples
    OP_READ       = 4'd10   // data ignored; stream out the clause register
  } op_e;

  typedef enum logic [3:0] {
    REG_NCOLORS = 4'd0,     // number of colour groups R
    REG_TARGET  = 4'd1,     // target SAT count C
    REG_OFFSET  = 4'd2,     // SAT = (objective + OFFSET) >>> SHIFT
    REG_SHIFT   = 4'd3,
    REG_MODE    = 4'd4,     // bit 0: uncoloured mode with global arbiter
    REG_SEED    = 4'd5      // arbiter random seed
  } reg_e;

  // In run mode a stream word with this bit set is the READ command.
  localparam int RUN_READ_BIT = 31;

  // One configuration write, from the stream wrapper to the solver core.
  typedef struct packed {
    logic        valid;
    op_e         op;
    logic [11:0] idx_a;
    logic [15:0] idx_b;
    logic [31:0] data;
  } cfg_wr_t;

endpackage
