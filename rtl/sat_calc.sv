// sat_calc: solution quality of the current clause outputs.
//
// The machine maximises the objective sum_k J_k (2T_k - 1) (= -E). The SAT
// value reported after every iteration is the affine map
//     sat = (objective + offset) >>> shift ,
// truncated to 16 bits, with offset and shift set by the host per problem:
// for MAX-3SAT expanded as in the paper (each clause contributes +1 when
// satisfied and -7 otherwise) offset = 7 * clauses and shift = 3 give the
// number of satisfied clauses; for MAX-CUT with J_k = -1 per edge,
// offset = edges and shift = 1 give the cut size. The paper names this block
// and its 16-bit output but not its insides; the affine form is this
// design's choice. solved is high while sat equals the target count C.
// Timing: combinational.
module sat_calc #(
  parameter int M_CLAUSES = 19176,
  localparam int OBJ_W    = 32
) (
  input  logic [M_CLAUSES-1:0]                t,
  input  logic signed [hoim_pkg::W_BITS-1:0]  j [M_CLAUSES],
  input  logic signed [OBJ_W-1:0]             offset,
  input  logic [4:0]                          shift,
  input  logic [hoim_pkg::SAT_W-1:0]          target,
  output logic [hoim_pkg::SAT_W-1:0]          sat,
  output logic                                solved,
  output logic signed [OBJ_W-1:0]             objective
);
  import hoim_pkg::*;

  always_comb begin
    logic signed [OBJ_W-1:0] acc;
    logic signed [OBJ_W-1:0] jk;
    logic signed [OBJ_W-1:0] scaled;
    acc = '0;
    for (int k = 0; k < M_CLAUSES; k++) begin
      jk  = {{(OBJ_W-W_BITS){j[k][W_BITS-1]}}, j[k]};
      acc = t[k] ? acc + jk : acc - jk;
    end
    objective = acc;
    scaled    = (acc + offset) >>> shift;
    sat       = scaled[SAT_W-1:0];
    solved    = (sat == target);
  end

endmodule
