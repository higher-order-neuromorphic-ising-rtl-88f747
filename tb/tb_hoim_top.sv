// tb_hoim_top: end-to-end test of the solver IP through its two streams
// only, as a DMA engine and host program would use it. The host side is
// modelled here: it builds a planted 3-regular 3-XORSAT instance, colours
// its interaction graph greedily, sends the tables as commands, and then
// streams annealed noise samples (Fowler-Nordheim schedule) for several
// runs. A reference model of the algorithm, evaluated as the words are
// queued, predicts every result word (SAT count and SOLVED bit) and every
// readout of the clause register. Random gaps on the input stream and
// random back-pressure on the output stream are applied throughout.
// Mechanisms counted (each must happen at least once): configuration
// writes, runs, input stalls, output back-pressure, a run ended by TLAST,
// READ inside a run, a stand-alone OP_READ, colour-counter wrap, parallel
// flips within one colour, SOLVED, arbiter (uncoloured) mode with more than
// one candidate neuron.
module tb_hoim_top;
  import hoim_pkg::*;
  import fn_noise_pkg::*;
  localparam int N = 12, M = 12, Q = 4, P = 3, L = 12, CWID = 4;
  localparam int NW = (M + 31) / 32;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_axis_tdata = '0;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 0;
  logic running, solved;

  hoim_top #(.N_VARS(N), .M_CLAUSES(M), .MAX_NEIGH(Q), .MAX_ORDER(P), .LANES(L), .COLOR_W(CWID)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_cfg = 0, n_runs = 0, n_in_stall = 0, n_out_stall = 0, n_tlast_stop = 0, n_read_run = 0,
      n_op_read = 0, n_wrap = 0, n_multi = 0, n_solved = 0, n_arb_multi = 0;

  typedef struct { logic [31:0] d; logic last; } word_t;
  word_t in_q [$], out_exp [$];

  // instance and reference state
  int mem [M][P];
  int jk [M];
  int colr [N], lanev [N], ncol;
  logic [M-1:0] tm;
  logic signed [15:0] mum [L];
  int cc;
  bit uncol;
  logic [31:0] arb_st;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmd(op_e op, int a, int b, logic [31:0] d);
    in_q.push_back('{ {op, 12'(a), 16'(b)}, 1'b0 });
    in_q.push_back('{ d, 1'b0 });
    if (!(op inside {OP_RUN, OP_READ, OP_NOP})) n_cfg++;
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
    bit xs [N];
    do begin
      for (int s = 0; s < 3*N; s++) slots[s] = s / 3;
      slots.shuffle();
      ok = 1;
      for (int k = 0; k < M; k++) begin
        for (int m = 0; m < P; m++) mem[k][m] = slots[3*k+m];
        if (mem[k][0] == mem[k][1] || mem[k][1] == mem[k][2] || mem[k][0] == mem[k][2]) ok = 0;
      end
    end while (!ok);
    for (int i = 0; i < N; i++) xs[i] = 1'($urandom);
    for (int k = 0; k < M; k++) jk[k] = (xs[mem[k][0]] ^ xs[mem[k][1]] ^ xs[mem[k][2]]) ? -1 : 1;
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
    bit x0 [N];
    for (int k = 0; k < M; k++) begin
      cmd(OP_SET_J, 0, k, 32'(jk[k]) & 32'h1f);
      for (int m = 0; m < P; m++) cmd(OP_SET_MEMBER, m, k, {1'b1, 15'd0, 16'(mem[k][m])});
    end
    for (int i = 0; i < N; i++) begin
      int s, cs;
      s = 0; cs = 0;
      for (int k = 0; k < M; k++)
        for (int m = 0; m < P; m++)
          if (mem[k][m] == i) begin
            cmd(OP_SET_NEIGH, s, i, {1'b1, 10'd0, 5'(jk[k]), 16'(k)});
            s++; cs += jk[k];
          end
      cmd(OP_SET_VAR, 0, i, {8'd0, 8'(colr[i]), 16'(cs)});
      cmd(OP_SET_LANE, 0, i, 32'(lanev[i]));
    end
    cmd(OP_SET_REG, 0, REG_NCOLORS, 32'(ncol));
    cmd(OP_SET_REG, 0, REG_TARGET, 32'(M));
    cmd(OP_SET_REG, 0, REG_OFFSET, 32'(M));
    cmd(OP_SET_REG, 0, REG_SHIFT, 32'd1);
    for (int i = 0; i < N; i++) x0[i] = 1'($urandom);
    for (int k = 0; k < M; k++) tm[k] = !(x0[mem[k][0]] ^ x0[mem[k][1]] ^ x0[mem[k][2]]);
    cmd(OP_SET_T, 0, 0, 32'(tm));
    for (int l = 0; l < L; l++) begin
      mum[l] = 16'(-int'($urandom_range(0, 5)));
      cmd(OP_SET_NOISE, 0, l, 32'(mum[l]));
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

  // one reference iteration of the algorithm
  task automatic ref_step(logic signed [15:0] nz);
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
  endtask

  task automatic readout_exp();
    for (int w = 0; w < NW; w++) begin
      logic [31:0] x;
      x = '0;
      for (int b = 0; b < 32; b++) if (w * 32 + b < M) x[b] = tm[w * 32 + b];
      out_exp.push_back('{ x, (w == NW - 1) });
    end
  endtask

  // one run: iters noise samples; ends with TLAST or with a READ word
  task automatic run(int iters, real a, real delta, bit end_with_read);
    cmd(OP_RUN, 0, 0, 0);
    n_runs++;
    cc = 0;
    for (int n = 0; n < iters; n++) begin
      logic signed [15:0] nz;
      bit last, sv;
      nz = fn_sample(a, 2.5, 8.0e4, delta, longint'(n));
      last = !end_with_read && (n == iters - 1);
      in_q.push_back('{ {16'd0, nz}, last });
      ref_step(nz);
      sv = (count_sat(tm) == M);
      if (sv) n_solved++;
      out_exp.push_back('{ {15'd0, sv, 16'(count_sat(tm))}, last });
    end
    if (end_with_read) begin
      in_q.push_back('{ 32'h8000_0000, 1'b0 });
      readout_exp();
      n_read_run++;
    end else n_tlast_stop++;
  endtask

  // input driver
  task automatic drive();
    while (in_q.size() > 0) begin
      @(negedge clk);
      if ($urandom_range(0, 4) == 0) s_axis_tvalid = 0;
      else begin
        s_axis_tvalid = 1;
        s_axis_tdata  = in_q[0].d;
        s_axis_tlast  = in_q[0].last;
      end
      @(posedge clk);
      if (s_axis_tvalid && !s_axis_tready) n_in_stall++;
      if (s_axis_tvalid && s_axis_tready) void'(in_q.pop_front());
    end
    @(negedge clk) s_axis_tvalid = 0;
  endtask

  // output sink and checker
  always @(negedge clk) m_axis_tready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
    if (m_axis_tvalid && m_axis_tready) begin
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
    if (dut.step) begin
      if ($countones(dut.fired) > 1) n_multi++;
      if (dut.sweep_done) n_wrap++;
    end
  end

  task automatic drain();
    drive();
    while (out_exp.size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  task automatic need(int n, string what);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    make_instance();
    $display("instance: %0d variables, %0d clauses, %0d colours", N, M, ncol);
    configure();
    cmd(OP_READ, 0, 0, 0); readout_exp(); n_op_read++;
    drain();
    uncol = 0;
    run(5000, 6.0, 2.5e-3, 0);
    drain();
    checks++;
    if (running) begin failures++; $display("FAIL still running after TLAST"); end
    run(400, 6.0, 2.5e-3, 1);
    drain();
    checks++;
    if (running) begin failures++; $display("FAIL still running after READ"); end
    // uncoloured mode, one neuron per iteration chosen by the arbiter
    arb_st = 32'h1234_5678;
    cmd(OP_SET_REG, 0, REG_SEED, arb_st);
    cmd(OP_SET_REG, 0, REG_MODE, 32'd1);
    uncol = 1;
    run(3000, 10.0, 2.5e-3, 0);
    cmd(OP_READ, 0, 0, 0); readout_exp(); n_op_read++;
    drain();
    $display("mechanisms:");
    need(n_cfg, "configuration writes");
    need(n_runs, "runs");
    need(n_in_stall, "input stalls");
    need(n_out_stall, "output back-pressure");
    need(n_tlast_stop, "run ended by TLAST");
    need(n_read_run, "READ inside a run");
    need(n_op_read, "OP_READ");
    need(n_wrap, "colour counter wraps");
    need(n_multi, "parallel flips");
    need(n_solved, "SOLVED results");
    need(n_arb_multi, "arbiter choices");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
