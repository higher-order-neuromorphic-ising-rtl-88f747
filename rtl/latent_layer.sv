// latent_layer: the encoder and the latent (spin) neurons of all N variables.
//
// For variable i the layer forms, over the clauses k in its neighbourhood,
//     q_cal_i = 2 * sum_k Htilde_{k,i} T_k - Csum_i ,
// where T_k in {0,1} is the stored clause output, Htilde_{k,i} = J_k is the
// clause weight and Csum_i = sum_k Htilde_{k,i}. This equals the bipolar sum
// sum_k J_k (2T_k - 1), i.e. half the energy change of flipping s_i. The
// neuron is active when q_cal_i < mu_i (its noise threshold) and it is
// selected: in coloured mode only when its colour equals the colour counter,
// in uncoloured mode always (the global arbiter then keeps one). The datapath
// follows the paper's FPGA figure: T replicated 5 times ANDed with the 5-bit
// weight, a 16-bit sum, a left shift by one, subtraction of Csum, a signed
// comparison with mu and a select gate. The neighbourhood is sparse: each
// variable has MAX_NEIGH slots {valid, weight, clause index}; the paper names
// this bound q but gives no value. Weights are two's complement and the
// 16-bit arithmetic wraps (this design's choice; the host keeps |q_cal| small).
// Timing: purely combinational, one iteration per clock.
module latent_layer #(
  parameter int N_VARS    = 800,
  parameter int M_CLAUSES = 19176,
  parameter int MAX_NEIGH = 128,
  parameter int LANES     = 800,
  parameter int COLOR_W   = 6,
  localparam int CW       = (M_CLAUSES > 1) ? $clog2(M_CLAUSES) : 1,
  localparam int LW       = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic [M_CLAUSES-1:0]                  t,
  input  logic                                  nb_valid  [N_VARS][MAX_NEIGH],
  input  logic [CW-1:0]                         nb_clause [N_VARS][MAX_NEIGH],
  input  logic signed [hoim_pkg::W_BITS-1:0]    nb_weight [N_VARS][MAX_NEIGH],
  input  logic signed [hoim_pkg::ACC_W-1:0]     csum      [N_VARS],
  input  logic [COLOR_W-1:0]                    color     [N_VARS],
  input  logic [LW-1:0]                         lane      [N_VARS],
  input  logic signed [hoim_pkg::NOISE_W-1:0]   mu        [LANES],
  input  logic [COLOR_W-1:0]                    cur_color,
  input  logic                                  uncolored,
  output logic [N_VARS-1:0]                     active,
  output logic signed [hoim_pkg::ACC_W-1:0]     q_cal     [N_VARS]
);
  import hoim_pkg::*;

  always_comb begin
    for (int i = 0; i < N_VARS; i++) begin
      logic signed [ACC_W-1:0]  sum;
      logic signed [W_BITS-1:0] gated;
      logic                     tk;
      logic signed [NOISE_W-1:0] mu_i;
      sum = '0;
      for (int j = 0; j < MAX_NEIGH; j++) begin
        tk    = nb_valid[i][j] && (32'(nb_clause[i][j]) < M_CLAUSES) && t[nb_clause[i][j]];
        gated = nb_weight[i][j] & {W_BITS{tk}};
        sum   = sum + {{(ACC_W-W_BITS){gated[W_BITS-1]}}, gated};
      end
      q_cal[i]  = (sum <<< 1) - csum[i];
      mu_i      = (32'(lane[i]) < LANES) ? mu[lane[i]] : '0;
      active[i] = (q_cal[i] < mu_i) && (uncolored || (color[i] == cur_color));
    end
  end

endmodule
