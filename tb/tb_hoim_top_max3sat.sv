// tb_hoim_top_max3sat: MAX-3SAT through the solver IP, at the size of the
// smallest satisfiable SATLIB set run on the FPGA (50 variables, 218
// clauses). The host model draws a random 3-SAT formula with a planted
// satisfying assignment and expands every clause into its 7 product terms:
//   8 * C = 7 + sum l_a s_a - sum l_a l_b s_a s_b + l_a l_b l_c s_a s_b s_c
// (l = +1 for a plain literal, -1 for a negated one), each term one clause
// slot with weight +-1, so 1526 slots; SAT offset 7*218 and shift 3 turn the
// objective into the number of satisfied 3-SAT clauses. Spins are coloured
// greedily on the variable interaction graph. One annealed run is streamed,
// ended by TLAST, and the clause register is read back. A reference model
// predicts every result word and the readout; the run must reach SOLVED.
module tb_hoim_top_max3sat;
  import hoim_pkg::*;
  import fn_noise_pkg::*;
  localparam int N = 50, C3 = 218, M = 7 * C3, Q = 128, P = 3, L = N, CWID = 6;
  localparam int NW = (M + 31) / 32, ITERS = 20000;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_axis_tdata = '0;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 0;
  logic running, solved;

  hoim_top #(.N_VARS(N), .M_CLAUSES(M), .MAX_NEIGH(Q), .MAX_ORDER(P), .LANES(L), .COLOR_W(CWID)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_solved = 0, best = 0, n_multi = 0;

  typedef struct { logic [31:0] d; logic last; } word_t;
  word_t in_q [$], out_exp [$];

  int lit_v [C3][3];
  int lit_l [C3][3];
  int mem [M][P];              // -1 = unused member slot
  int jk [M];
  int nbk [N][$];              // terms holding variable i
  int colr [N], lanev [N], ncol;
  bit x [N];
  logic signed [15:0] mum [L];
  int cc;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmd(op_e op, int a, int b, logic [31:0] d);
    in_q.push_back('{ {op, 12'(a), 16'(b)}, 1'b0 });
    in_q.push_back('{ d, 1'b0 });
  endtask

  function automatic bit term_val(int k);   // T_k: product of member spins is +1
    bit par;
    par = 0;
    for (int m = 0; m < P; m++) if (mem[k][m] >= 0) par ^= !x[mem[k][m]];
    return !par;
  endfunction

  function automatic int sat3();
    int s;
    s = 0;
    for (int c = 0; c < C3; c++) begin
      bit ok;
      ok = 0;
      for (int j = 0; j < 3; j++) if (x[lit_v[c][j]] == (lit_l[c][j] > 0)) ok = 1;
      if (ok) s++;
    end
    return s;
  endfunction

  task automatic make_instance();
    bit xs [N];
    int k;
    for (int i = 0; i < N; i++) xs[i] = 1'($urandom);
    for (int c = 0; c < C3; c++) begin
      bit ok;
      do begin
        lit_v[c][0] = $urandom_range(0, N-1);
        do lit_v[c][1] = $urandom_range(0, N-1); while (lit_v[c][1] == lit_v[c][0]);
        do lit_v[c][2] = $urandom_range(0, N-1); while (lit_v[c][2] == lit_v[c][0] || lit_v[c][2] == lit_v[c][1]);
        ok = 0;
        for (int j = 0; j < 3; j++) begin
          lit_l[c][j] = $urandom_range(0, 1) ? 1 : -1;
          if (xs[lit_v[c][j]] == (lit_l[c][j] > 0)) ok = 1;
        end
      end while (!ok);
    end
    k = 0;
    for (int c = 0; c < C3; c++) begin
      int a, b, d;
      a = lit_v[c][0]; b = lit_v[c][1]; d = lit_v[c][2];
      for (int j = 0; j < 3; j++) begin mem[k] = '{lit_v[c][j], -1, -1}; jk[k] = lit_l[c][j]; k++; end
      mem[k] = '{a, b, -1}; jk[k] = -lit_l[c][0] * lit_l[c][1]; k++;
      mem[k] = '{a, d, -1}; jk[k] = -lit_l[c][0] * lit_l[c][2]; k++;
      mem[k] = '{b, d, -1}; jk[k] = -lit_l[c][1] * lit_l[c][2]; k++;
      mem[k] = '{a, b, d};  jk[k] =  lit_l[c][0] * lit_l[c][1] * lit_l[c][2]; k++;
    end
    for (int t = 0; t < M; t++)
      for (int m = 0; m < P; m++) if (mem[t][m] >= 0) nbk[mem[t][m]].push_back(t);
    // greedy colouring of the interaction graph
    ncol = 0;
    for (int i = 0; i < N; i++) begin
      bit used [64];
      foreach (used[u]) used[u] = 0;
      for (int i2 = 0; i2 < i; i2++)
        for (int c = 0; c < C3; c++) begin
          bit hi, h2;
          hi = 0; h2 = 0;
          for (int j = 0; j < 3; j++) begin if (lit_v[c][j] == i) hi = 1; if (lit_v[c][j] == i2) h2 = 1; end
          if (hi && h2) used[colr[i2]] = 1;
        end
      colr[i] = 0;
      while (used[colr[i]]) colr[i]++;
      if (colr[i] + 1 > ncol) ncol = colr[i] + 1;
      lanev[i] = 0;
      for (int i2 = 0; i2 < i; i2++) if (colr[i2] == colr[i]) lanev[i]++;
    end
  endtask

  task automatic configure();
    for (int t = 0; t < M; t++) begin
      cmd(OP_SET_J, 0, t, 32'(jk[t]) & 32'h1f);
      for (int m = 0; m < P; m++)
        if (mem[t][m] >= 0) cmd(OP_SET_MEMBER, m, t, {1'b1, 15'd0, 16'(mem[t][m])});
    end
    for (int i = 0; i < N; i++) begin
      int cs;
      cs = 0;
      foreach (nbk[i][s]) begin
        cmd(OP_SET_NEIGH, s, i, {1'b1, 10'd0, 5'(jk[nbk[i][s]]), 16'(nbk[i][s])});
        cs += jk[nbk[i][s]];
      end
      cmd(OP_SET_VAR, 0, i, {8'd0, 8'(colr[i]), 16'(cs)});
      cmd(OP_SET_LANE, 0, i, 32'(lanev[i]));
    end
    cmd(OP_SET_REG, 0, REG_NCOLORS, 32'(ncol));
    cmd(OP_SET_REG, 0, REG_TARGET, 32'(C3));
    cmd(OP_SET_REG, 0, REG_OFFSET, 32'(7 * C3));
    cmd(OP_SET_REG, 0, REG_SHIFT, 32'd3);
    for (int i = 0; i < N; i++) x[i] = 1'($urandom);
    for (int w = 0; w < NW; w++) begin
      logic [31:0] d;
      d = '0;
      for (int b = 0; b < 32; b++) if (32*w + b < M) d[b] = term_val(32*w + b);
      cmd(OP_SET_T, 0, w, d);
    end
    for (int l = 0; l < L; l++) begin
      mum[l] = 16'(-int'($urandom_range(0, 3)));
      cmd(OP_SET_NOISE, 0, l, 32'(mum[l]));
    end
  endtask

  // reference iteration on the spins
  task automatic ref_step(logic signed [15:0] nz);
    bit fire [N];
    int nf;
    nf = 0;
    for (int i = 0; i < N; i++) begin
      int q;
      q = 0;
      foreach (nbk[i][s]) q += jk[nbk[i][s]] * (term_val(nbk[i][s]) ? 1 : -1);
      fire[i] = (colr[i] == cc) && (q < int'(mum[lanev[i]]));
      if (fire[i]) nf++;
    end
    for (int i = 0; i < N; i++) if (fire[i]) x[i] = !x[i];
    if (nf > 1) n_multi++;
    cc = (cc + 1 >= ncol) ? 0 : cc + 1;
    for (int l = L-1; l > 0; l--) mum[l] = mum[l-1];
    mum[0] = nz;
  endtask

  task automatic drive();
    while (in_q.size() > 0) begin
      @(negedge clk);
      s_axis_tvalid = ($urandom_range(0, 7) != 0);
      s_axis_tdata  = in_q[0].d;
      s_axis_tlast  = in_q[0].last;
      @(posedge clk);
      if (s_axis_tvalid && s_axis_tready) void'(in_q.pop_front());
    end
    @(negedge clk) s_axis_tvalid = 0;
  endtask

  always @(negedge clk) m_axis_tready <= ($urandom_range(0, 7) != 0);

  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    checks++;
    if (out_exp.size() == 0) begin
      failures++; $display("FAIL unexpected output word %h", m_axis_tdata);
    end else begin
      word_t e;
      e = out_exp.pop_front();
      if (m_axis_tdata !== e.d || m_axis_tlast !== e.last) begin
        failures++;
        if (failures < 10) $display("FAIL output %h/%b expected %h/%b", m_axis_tdata, m_axis_tlast, e.d, e.last);
      end
    end
  end

  initial begin
    int maxdeg;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    make_instance();
    maxdeg = 0;
    for (int i = 0; i < N; i++) if (nbk[i].size() > maxdeg) maxdeg = nbk[i].size();
    checks++;
    if (maxdeg > Q) begin failures++; $display("FAIL neighbourhood %0d exceeds %0d slots", maxdeg, Q); end
    configure();
    $display("%0d variables, %0d clauses, %0d terms, %0d colours, max neighbourhood %0d, initial SAT %0d",
             N, C3, M, ncol, maxdeg, sat3());
    cmd(OP_RUN, 0, 0, 0);
    cc = 0;
    for (int n = 0; n < ITERS; n++) begin
      logic signed [15:0] nz;
      int s;
      nz = fn_sample(8.0, 2.5, 8.0e4, 1.0e-3, longint'(n));
      in_q.push_back('{ {16'd0, nz}, (n == ITERS - 1) });
      ref_step(nz);
      s = sat3();
      if (s > best) best = s;
      if (s == C3) n_solved++;
      out_exp.push_back('{ {15'd0, (s == C3), 16'(s)}, (n == ITERS - 1) });
    end
    cmd(OP_READ, 0, 0, 0);
    for (int w = 0; w < NW; w++) begin
      logic [31:0] d;
      d = '0;
      for (int b = 0; b < 32; b++) if (32*w + b < M) d[b] = term_val(32*w + b);
      out_exp.push_back('{ d, (w == NW - 1) });
    end
    drive();
    while (out_exp.size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("best SAT %0d of %0d, iterations with all clauses satisfied %0d, multi-flip iterations %0d",
             best, C3, n_solved, n_multi);
    checks += 2;
    if (n_solved == 0) begin failures++; $display("FAIL never satisfied all clauses"); end
    if (n_multi == 0)  begin failures++; $display("FAIL no parallel flips"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
