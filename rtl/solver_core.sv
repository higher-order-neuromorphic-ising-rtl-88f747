// solver_core: the graph-coloured higher-order Ising machine.
//
// State: the M-bit clause-output register T (clause_layer), the noise vector
// and the colour counter. Problem tables, written by the host before a run
// through the cfg port: for every variable its MAX_NEIGH neighbourhood slots
// {valid, weight J_k, clause k}, its colour, its column sum Csum_i and its
// noise lane; for every clause its weight J_k and up to MAX_ORDER member
// variables; plus the number of colours, the SAT target, the SAT offset and
// shift, the mode and the arbiter seed.
//
// One iteration per `step` (one accepted noise sample): all latent neurons
// of the current colour compare 2*sum(J T) - Csum with their noise stage; the
// ones that fire toggle every clause holding an odd number of them; then
// (same clock edge) T is updated, the new sample enters the noise vector and
// the colour counter moves on. In uncoloured mode every variable is tested
// and the global arbiter lets one fire. sat/solved describe the current T.
// The paper fixes the datapath and the one-iteration-per-clock schedule; the
// run-time loadable tables and their write format are this design's choice
// (the paper only says the host streams configuration bits).
module solver_core
  import hoim_pkg::*;
#(
  parameter int N_VARS    = 800,
  parameter int M_CLAUSES = 19176,
  parameter int MAX_NEIGH = 128,
  parameter int MAX_ORDER = 3,
  parameter int LANES     = 800,
  parameter int COLOR_W   = 6,
  localparam int CW       = (M_CLAUSES > 1) ? $clog2(M_CLAUSES) : 1,
  localparam int VW       = (N_VARS > 1) ? $clog2(N_VARS) : 1,
  localparam int LW       = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_wr_t                   cfg,
  input  logic                      run_start,
  input  logic                      step,
  input  logic signed [NOISE_W-1:0] noise,
  output logic [SAT_W-1:0]          sat,
  output logic                      solved,
  output logic signed [31:0]        objective,
  output logic [M_CLAUSES-1:0]      t_state,
  output logic [N_VARS-1:0]         fired,
  output logic [COLOR_W-1:0]        cur_color,
  output logic                      sweep_done
);

  // ---------------- problem tables ----------------
  logic                     nb_valid  [N_VARS][MAX_NEIGH];
  logic [CW-1:0]            nb_clause [N_VARS][MAX_NEIGH];
  logic signed [W_BITS-1:0] nb_weight [N_VARS][MAX_NEIGH];
  logic signed [ACC_W-1:0]  csum      [N_VARS];
  logic [COLOR_W-1:0]       color     [N_VARS];
  logic [LW-1:0]            lane      [N_VARS];
  logic                     mb_valid  [M_CLAUSES][MAX_ORDER];
  logic [VW-1:0]            mb_var    [M_CLAUSES][MAX_ORDER];
  logic signed [W_BITS-1:0] jw        [M_CLAUSES];
  logic [COLOR_W:0]         num_colors;
  logic [SAT_W-1:0]         target;
  logic signed [31:0]       sat_offset;
  logic [4:0]               sat_shift;
  logic                     uncolored;

  logic wr;
  assign wr = cfg.valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_VARS; i++) begin
        for (int j = 0; j < MAX_NEIGH; j++) begin
          nb_valid[i][j]  <= 1'b0;
          nb_clause[i][j] <= '0;
          nb_weight[i][j] <= '0;
        end
        csum[i]  <= '0;
        color[i] <= '0;
        lane[i]  <= '0;
      end
      for (int k = 0; k < M_CLAUSES; k++) begin
        for (int m = 0; m < MAX_ORDER; m++) begin
          mb_valid[k][m] <= 1'b0;
          mb_var[k][m]   <= '0;
        end
        jw[k] <= '0;
      end
      num_colors <= (COLOR_W+1)'(1);
      target     <= '1;
      sat_offset <= '0;
      sat_shift  <= '0;
      uncolored  <= 1'b0;
    end else if (wr) begin
      unique case (cfg.op)
        OP_SET_J:
          if (32'(cfg.idx_b) < M_CLAUSES) jw[cfg.idx_b] <= cfg.data[W_BITS-1:0];
        OP_SET_MEMBER:
          if (32'(cfg.idx_b) < M_CLAUSES && 32'(cfg.idx_a) < MAX_ORDER) begin
            mb_valid[cfg.idx_b][cfg.idx_a] <= cfg.data[31];
            mb_var[cfg.idx_b][cfg.idx_a]   <= VW'(cfg.data[15:0]);
          end
        OP_SET_NEIGH:
          if (32'(cfg.idx_b) < N_VARS && 32'(cfg.idx_a) < MAX_NEIGH) begin
            nb_valid[cfg.idx_b][cfg.idx_a]  <= cfg.data[31];
            nb_weight[cfg.idx_b][cfg.idx_a] <= cfg.data[16 +: W_BITS];
            nb_clause[cfg.idx_b][cfg.idx_a] <= CW'(cfg.data[15:0]);
          end
        OP_SET_VAR:
          if (32'(cfg.idx_b) < N_VARS) begin
            csum[cfg.idx_b]  <= cfg.data[ACC_W-1:0];
            color[cfg.idx_b] <= cfg.data[16 +: COLOR_W];
          end
        OP_SET_LANE:
          if (32'(cfg.idx_b) < N_VARS) lane[cfg.idx_b] <= LW'(cfg.data[15:0]);
        OP_SET_REG:
          unique case (cfg.idx_b[3:0])
            REG_NCOLORS: num_colors <= cfg.data[COLOR_W:0];
            REG_TARGET:  target     <= cfg.data[SAT_W-1:0];
            REG_OFFSET:  sat_offset <= cfg.data;
            REG_SHIFT:   sat_shift  <= cfg.data[4:0];
            REG_MODE:    uncolored  <= cfg.data[0];
            default: ;
          endcase
        default: ;
      endcase
    end
  end

  // ---------------- datapath ----------------
  logic signed [NOISE_W-1:0] mu [LANES];
  logic signed [ACC_W-1:0]   q_cal [N_VARS];
  logic [N_VARS-1:0]         active, grant, q;
  logic [M_CLAUSES-1:0]      sigma;

  noise_vector #(.LANES(LANES), .NOISE_W(NOISE_W)) u_noise (
    .clk, .rst_n,
    .load_en  (wr && cfg.op == OP_SET_NOISE),
    .load_idx (LW'(cfg.idx_b)),
    .load_val (cfg.data[NOISE_W-1:0]),
    .shift_en (step),
    .sample_in(noise),
    .mu
  );

  color_counter #(.COLOR_W(COLOR_W)) u_color (
    .clk, .rst_n,
    .clear     (run_start),
    .advance   (step && !uncolored),
    .num_colors,
    .color     (cur_color),
    .wrapped   (sweep_done)
  );

  latent_layer #(
    .N_VARS(N_VARS), .M_CLAUSES(M_CLAUSES), .MAX_NEIGH(MAX_NEIGH),
    .LANES(LANES), .COLOR_W(COLOR_W)
  ) u_latent (
    .t(t_state), .nb_valid, .nb_clause, .nb_weight, .csum, .color, .lane, .mu,
    .cur_color, .uncolored, .active, .q_cal
  );

  global_arbiter #(.N(N_VARS)) u_arb (
    .clk, .rst_n,
    .step,
    .seed_load(wr && cfg.op == OP_SET_REG && cfg.idx_b[3:0] == REG_SEED),
    .seed     (cfg.data),
    .active,
    .grant
  );

  assign q     = uncolored ? grant : active;
  assign fired = step ? q : '0;

  clause_layer #(.N_VARS(N_VARS), .M_CLAUSES(M_CLAUSES), .MAX_ORDER(MAX_ORDER)) u_clause (
    .clk, .rst_n,
    .en       (step),
    .q,
    .mb_valid, .mb_var,
    .load_en  (wr && cfg.op == OP_SET_T),
    .load_addr(cfg.idx_b),
    .load_data(cfg.data),
    .sigma,
    .t        (t_state)
  );

  sat_calc #(.M_CLAUSES(M_CLAUSES)) u_sat (
    .t(t_state), .j(jw), .offset(sat_offset), .shift(sat_shift), .target,
    .sat, .solved, .objective
  );

endmodule
