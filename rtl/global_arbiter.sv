// global_arbiter: keeps one of the simultaneously active latent neurons.
//
// Used in the uncoloured mode, where every neuron is tested against its
// threshold in parallel and, to keep single-spin-flip dynamics, only one of
// the active ones may fire (rejection-free sampling). The paper asks for a
// uniformly random choice without saying how hardware makes it; here a 32-bit
// xorshift generator gives a start index r in [0, N) and the first active
// neuron at or after r, searching circularly, is granted. This is uniform
// when active neurons are spread out and biased when they are clustered.
// grant is one-hot, or zero when nothing is active. Timing: grant is
// combinational from active and the generator state; the state steps on
// `step` (one iteration) and is seeded with seed_load (a zero seed is
// replaced by a constant, as xorshift must not hold zero).
module global_arbiter #(
  parameter int N = 800
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          step,
  input  logic          seed_load,
  input  logic [31:0]   seed,
  input  logic [N-1:0]  active,
  output logic [N-1:0]  grant
);

  localparam logic [31:0] DEFAULT_SEED = 32'h2545_F491;

  logic [31:0] state, x1, x2, x3;
  logic [31:0] start;
  logic [N-1:0] upper, masked;

  // xorshift32 (13, 17, 5)
  assign x1 = state ^ (state << 13);
  assign x2 = x1 ^ (x1 >> 17);
  assign x3 = x2 ^ (x2 << 5);

  always_ff @(posedge clk) begin
    if (!rst_n)         state <= DEFAULT_SEED;
    else if (seed_load) state <= (seed == 32'd0) ? DEFAULT_SEED : seed;
    else if (step)      state <= x3;
  end

  assign start  = state % 32'(N);
  assign upper  = {N{1'b1}} << start;   // positions start .. N-1
  assign masked = active & upper;

  // lowest set bit of a vector: v & -v
  always_comb begin
    if (|masked) grant = masked & (~masked + 1'b1);
    else         grant = active & (~active + 1'b1);
  end

endmodule
