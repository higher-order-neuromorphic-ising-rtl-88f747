// tb_solver_core: runs the core on a planted 3-regular 3-XORSAT instance
// (10 variables, 10 three-variable clauses, as in the paper's small
// example) in coloured mode and then in uncoloured (arbiter) mode, with
// annealed noise from the FN model. A reference model of the algorithm
// (bipolar energy change, colour schedule, noise shift register, arbiter)
// predicts the clause register after every iteration; the SAT value is
// checked against an independent count of satisfied equations.
module tb_solver_core;
  import hoim_pkg::*;
  import fn_noise_pkg::*;
  localparam int N = 10, M = 10, Q = 4, P = 3, L = 10, CWID = 4;

  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg = '0;
  logic run_start = 0, step = 0;
  logic signed [15:0] noise = '0;
  logic [15:0] sat;
  logic solved;
  logic signed [31:0] objective;
  logic [M-1:0] t_state;
  logic [N-1:0] fired;
  logic [CWID-1:0] cur_color;
  logic sweep_done;

  solver_core #(.N_VARS(N), .M_CLAUSES(M), .MAX_NEIGH(Q), .MAX_ORDER(P), .LANES(L), .COLOR_W(CWID)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_multi = 0, n_solved = 0, n_sweeps = 0, n_arb_multi = 0;

  // instance
  int mem [M][P];
  int jk [M];
  int colr [N], lanev [N], ncol;
  // reference state
  logic [M-1:0] tm;
  logic signed [15:0] mum [L];
  int cc;
  logic [31:0] arb_st;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(op_e op, int a, int b, logic [31:0] d);
    @(negedge clk);
    cfg.valid = 1; cfg.op = op; cfg.idx_a = 12'(a); cfg.idx_b = 16'(b); cfg.data = d;
    @(negedge clk);
    cfg.valid = 0;
  endtask

  function automatic bit shares(int i1, int i2);
    for (int k = 0; k < M; k++) begin
      bit a, b;
      a = 0; b = 0;
      for (int m = 0; m < P; m++) begin if (mem[k][m] == i1) a = 1; if (mem[k][m] == i2) b = 1; end
      if (a && b) return 1;
    end
    return 0;
  endfunction

  task automatic make_instance();
    int slots [3*N];
    bit ok;
    do begin
      for (int s = 0; s < 3*N; s++) slots[s] = s / 3;
      slots.shuffle();
      ok = 1;
      for (int k = 0; k < M; k++) begin
        for (int m = 0; m < P; m++) mem[k][m] = slots[3*k+m];
        if (mem[k][0] == mem[k][1] || mem[k][1] == mem[k][2] || mem[k][0] == mem[k][2]) ok = 0;
      end
    end while (!ok);
    // planted solution x*, J_k = (-1)^{b_k}
    begin
      bit xs [N];
      for (int i = 0; i < N; i++) xs[i] = 1'($urandom);
      for (int k = 0; k < M; k++) jk[k] = (xs[mem[k][0]] ^ xs[mem[k][1]] ^ xs[mem[k][2]]) ? -1 : 1;
    end
    // greedy colouring, lane = rank within colour
    ncol = 0;
    for (int i = 0; i < N; i++) begin
      int c;
      c = 0;
      for (bit clash = 1; clash; ) begin
        clash = 0;
        for (int i2 = 0; i2 < i; i2++) if (colr[i2] == c && shares(i, i2)) clash = 1;
        if (clash) c++;
      end
      colr[i] = c;
      if (c + 1 > ncol) ncol = c + 1;
      lanev[i] = 0;
      for (int i2 = 0; i2 < i; i2++) if (colr[i2] == c) lanev[i]++;
    end
  endtask

  task automatic configure();
    for (int k = 0; k < M; k++) begin
      wr(OP_SET_J, 0, k, 32'(jk[k]) & 32'h1f);
      for (int m = 0; m < P; m++) wr(OP_SET_MEMBER, m, k, {1'b1, 15'd0, 16'(mem[k][m])});
    end
    for (int i = 0; i < N; i++) begin
      int s, cs;
      s = 0; cs = 0;
      for (int k = 0; k < M; k++)
        for (int m = 0; m < P; m++)
          if (mem[k][m] == i) begin
            wr(OP_SET_NEIGH, s, i, {1'b1, 10'd0, 5'(jk[k]), 16'(k)});
            s++; cs += jk[k];
          end
      wr(OP_SET_VAR, 0, i, {8'd0, 8'(colr[i]), 16'(cs)});
      wr(OP_SET_LANE, 0, i, 32'(lanev[i]));
    end
    wr(OP_SET_REG, 0, REG_NCOLORS, 32'(ncol));
    wr(OP_SET_REG, 0, REG_TARGET, 32'(M));
    wr(OP_SET_REG, 0, REG_OFFSET, 32'(M));
    wr(OP_SET_REG, 0, REG_SHIFT, 32'd1);
    // random initial spins -> clause bits (1 = even parity of x)
    begin
      bit x0 [N];
      for (int i = 0; i < N; i++) x0[i] = 1'($urandom);
      for (int k = 0; k < M; k++) tm[k] = !(x0[mem[k][0]] ^ x0[mem[k][1]] ^ x0[mem[k][2]]);
      wr(OP_SET_T, 0, 0, 32'(tm));
    end
    for (int l = 0; l < L; l++) begin
      mum[l] = 16'(-int'($urandom_range(0, 5)));
      wr(OP_SET_NOISE, 0, l, 32'(mum[l]));
    end
  endtask

  function automatic int count_sat(logic [M-1:0] tv);
    int s;
    s = 0;
    for (int k = 0; k < M; k++) if ((tv[k] ? 1 : -1) == jk[k]) s++;
    return s;
  endfunction

  function automatic logic [31:0] xs32(logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
    return x;
  endfunction

  // one reference iteration; returns fired set
  function automatic logic [N-1:0] ref_step(bit uncol, logic signed [15:0] nz);
    logic [N-1:0] act, q;
    logic [M-1:0] sg;
    for (int i = 0; i < N; i++) begin
      int qc;
      qc = 0;
      for (int k = 0; k < M; k++)
        for (int m = 0; m < P; m++)
          if (mem[k][m] == i) qc += jk[k] * (tm[k] ? 1 : -1);
      act[i] = (qc < int'(mum[lanev[i]])) && (uncol || colr[i] == cc);
    end
    q = act;
    if (uncol) begin
      int r;
      q = '0;
      r = int'(arb_st % N);
      for (int o = 0; o < N; o++) if (act[(r + o) % N]) begin q[(r + o) % N] = 1; break; end
      if ($countones(act) > 1) n_arb_multi++;
      arb_st = xs32(arb_st);
    end else begin
      cc = (cc + 1 >= ncol) ? 0 : cc + 1;
    end
    for (int k = 0; k < M; k++) begin
      sg[k] = 0;
      for (int m = 0; m < P; m++) sg[k] ^= q[mem[k][m]];
    end
    tm = tm ^ sg;
    for (int l = L-1; l > 0; l--) mum[l] = mum[l-1];
    mum[0] = nz;
    return q;
  endfunction

  task automatic run(bit uncol, int iters, real a, real delta);
    @(negedge clk) run_start = 1;
    @(negedge clk) run_start = 0;
    cc = 0;
    for (int n = 0; n < iters; n++) begin
      logic [N-1:0] exp_q;
      @(negedge clk);
      step  = ($urandom_range(0, 7) != 0);
      noise = fn_sample(a, 2.5, 8.0e4, delta, longint'(n));
      #1;
      if (step) begin
        logic [N-1:0] got_q;
        got_q = fired;
        exp_q = ref_step(uncol, noise);
        checks++;
        if (got_q !== exp_q) begin failures++; $display("FAIL fired %b expected %b (iter %0d)", got_q, exp_q, n); end
        if ($countones(got_q) > 1) n_multi++;
        if (sweep_done) n_sweeps++;
      end
      @(posedge clk); #1;
      checks += 2;
      if (t_state !== tm) begin failures++; $display("FAIL T %b expected %b (iter %0d)", t_state, tm, n); end
      if (int'(sat) != count_sat(t_state)) begin failures++; $display("FAIL sat %0d expected %0d", sat, count_sat(t_state)); end
      if (solved) n_solved++;
    end
    @(negedge clk) step = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    make_instance();
    $display("colours: %0d", ncol);
    configure();
    checks++;
    if (t_state !== tm) begin failures++; $display("FAIL initial T load"); end
    run(0, 6000, 6.0, 2.5e-3);
    // uncoloured mode with the arbiter
    arb_st = 32'hC0FFEE11;
    wr(OP_SET_REG, 0, REG_SEED, arb_st);
    wr(OP_SET_REG, 0, REG_MODE, 32'd1);
    run(1, 3000, 10.0, 2.5e-3);
    $display("multi-flip iterations=%0d sweeps=%0d solved-cycles=%0d arbiter-conflicts=%0d", n_multi, n_sweeps, n_solved, n_arb_multi);
    checks += 4;
    if (n_multi == 0)     begin failures++; $display("FAIL no parallel update seen"); end
    if (n_sweeps == 0)    begin failures++; $display("FAIL no colour sweep"); end
    if (n_solved == 0)    begin failures++; $display("FAIL ground state never reached"); end
    if (n_arb_multi == 0) begin failures++; $display("FAIL arbiter never had to choose"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
