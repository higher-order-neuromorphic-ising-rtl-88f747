// tb_latent_layer: random sparse tables, clause bits and thresholds. The
// expected aggregated input is computed in the bipolar form
// sum_k J_k (2T_k - 1) when Csum is the true column sum, and as
// 2 sum J_k T_k - Csum for arbitrary Csum; activity is q_cal < mu gated by
// colour (or by nothing in uncoloured mode).
module tb_latent_layer;
  localparam int N = 6, M = 10, Q = 4, L = 4, CW_ = 3;
  localparam int CIW = $clog2(M), LW = $clog2(L);
  logic [M-1:0] t;
  logic nb_valid [N][Q];
  logic [CIW-1:0] nb_clause [N][Q];
  logic signed [4:0] nb_weight [N][Q];
  logic signed [15:0] csum [N];
  logic [CW_-1:0] color [N];
  logic [LW-1:0] lane [N];
  logic signed [15:0] mu [L];
  logic [CW_-1:0] cur_color;
  logic uncolored;
  logic [N-1:0] active;
  logic signed [15:0] q_cal [N];
  int checks = 0, failures = 0, n_active = 0, n_gated = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  latent_layer #(.N_VARS(N), .M_CLAUSES(M), .MAX_NEIGH(Q), .LANES(L), .COLOR_W(CW_)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      bit true_csum;
      true_csum = ($urandom_range(0, 3) != 0);
      t = M'($urandom);
      cur_color = CW_'($urandom_range(0, 3));
      uncolored = ($urandom_range(0, 4) == 0);
      for (int l = 0; l < L; l++) mu[l] = 16'(int'($urandom_range(0, 80)) - 60);
      for (int i = 0; i < N; i++) begin
        int cs;
        cs = 0;
        for (int j = 0; j < Q; j++) begin
          nb_valid[i][j]  = ($urandom_range(0, 4) != 0);
          nb_clause[i][j] = CIW'($urandom_range(0, M-1));
          nb_weight[i][j] = 5'(int'($urandom_range(0, 31)) - 16);
          if (nb_valid[i][j]) cs += int'(nb_weight[i][j]);
        end
        csum[i]  = true_csum ? 16'(cs) : 16'(int'($urandom_range(0, 200)) - 100);
        color[i] = CW_'($urandom_range(0, 3));
        lane[i]  = LW'($urandom_range(0, L-1));
      end
      #1;
      for (int i = 0; i < N; i++) begin
        int exp_q, s2;
        bit exp_a;
        exp_q = 0; s2 = 0;
        for (int j = 0; j < Q; j++)
          if (nb_valid[i][j]) begin
            exp_q += int'(nb_weight[i][j]) * (t[nb_clause[i][j]] ? 1 : -1);
            s2    += t[nb_clause[i][j]] ? int'(nb_weight[i][j]) : 0;
          end
        if (!true_csum) exp_q = 2 * s2 - int'(csum[i]);
        exp_a = (exp_q < int'(mu[lane[i]])) && (uncolored || color[i] == cur_color);
        checks += 2;
        if (int'(q_cal[i]) != exp_q) begin
          failures++; $display("FAIL q_cal[%0d] got %0d expected %0d", i, q_cal[i], exp_q);
        end
        if (active[i] !== exp_a) begin
          failures++; $display("FAIL active[%0d] got %0b expected %0b", i, active[i], exp_a);
        end
        if (exp_a) n_active++;
        if ((exp_q < int'(mu[lane[i]])) && !exp_a) n_gated++;
      end
      @(posedge clk);
    end
    checks++;
    if (n_active == 0 || n_gated == 0) begin failures++; $display("FAIL coverage"); end
    $display("active=%0d gated_by_colour=%0d", n_active, n_gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
