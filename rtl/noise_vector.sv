// noise_vector: the bank of LANES 16-bit shift-register stages that buffers
// the most recent noise thresholds mu streamed in from the host.
//
// Every accepted iteration (shift_en) the newest sample enters stage 0 and
// every stage moves one place along, so stage j holds the sample that arrived
// j iterations ago. Latent neuron i compares against the stage of its own
// lane; a sample is therefore reused by different variables on successive
// iterations, as in the paper's FPGA design, which sizes the bank to the
// largest colour group. Before a run the host may write any stage directly
// (load_en), which is how the paper's initial buffer fill is done here.
// Timing: one clock; outputs come straight from the registers. shift_en has
// priority over load_en. Reset clears all stages (this design's choice).
module noise_vector #(
  parameter int LANES   = 800,
  parameter int NOISE_W = 16,
  localparam int LW     = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load_en,
  input  logic [LW-1:0]             load_idx,
  input  logic signed [NOISE_W-1:0] load_val,
  input  logic                      shift_en,
  input  logic signed [NOISE_W-1:0] sample_in,
  output logic signed [NOISE_W-1:0] mu [LANES]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < LANES; j++) mu[j] <= '0;
    end else if (shift_en) begin
      mu[0] <= sample_in;
      for (int j = 1; j < LANES; j++) mu[j] <= mu[j-1];
    end else if (load_en && (32'(load_idx) < LANES)) begin
      mu[load_idx] <= load_val;
    end
  end

endmodule
