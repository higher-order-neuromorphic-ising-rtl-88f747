// clause_layer: the decoder (toggle) neurons holding the M clause outputs.
//
// Clause k stores one bit T_k. Each iteration (en) it computes the parity
// sigma_k of the fired latent neurons among its members (up to MAX_ORDER
// variables, each slot {valid, variable index}) and toggles T_k when the
// parity is odd, T <= T xor sigma. This is the paper's odd-parity checker and
// T register; the decoder threshold theta of the analog formulation is not
// needed because q is a clean bit here. The host writes the initial clause
// outputs 32 at a time (load_en/load_addr/load_data); word w covers clauses
// 32w .. 32w+31. Timing: sigma is combinational from q, T updates on the next
// clock edge. Reset clears T (this design's choice).
module clause_layer #(
  parameter int N_VARS    = 800,
  parameter int M_CLAUSES = 19176,
  parameter int MAX_ORDER = 3,
  localparam int VW       = (N_VARS > 1) ? $clog2(N_VARS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [N_VARS-1:0]     q,
  input  logic                  mb_valid [M_CLAUSES][MAX_ORDER],
  input  logic [VW-1:0]         mb_var   [M_CLAUSES][MAX_ORDER],
  input  logic                  load_en,
  input  logic [15:0]           load_addr,
  input  logic [31:0]           load_data,
  output logic [M_CLAUSES-1:0]  sigma,
  output logic [M_CLAUSES-1:0]  t
);

  always_comb begin
    for (int k = 0; k < M_CLAUSES; k++) begin
      logic p;
      p = 1'b0;
      for (int m = 0; m < MAX_ORDER; m++)
        if (mb_valid[k][m] && (32'(mb_var[k][m]) < N_VARS)) p = p ^ q[mb_var[k][m]];
      sigma[k] = p;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t <= '0;
    end else if (load_en) begin
      for (int b = 0; b < 32; b++)
        if (32'(load_addr) * 32 + b < M_CLAUSES) t[32'(load_addr) * 32 + b] <= load_data[b];
    end else if (en) begin
      t <= t ^ sigma;
    end
  end

endmodule
