// tb_hoim_top_full: one complete solve with the solver IP at its default
// size (800 variables, 19176 clause slots, 128 neighbour slots, 800 noise
// lanes). The problem is MAX-CUT on an 800-node 20 x 40 toroidal grid
// (1600 edges, every edge an order-2 clause with weight -1); the grid is
// bipartite, so two colours suffice and the maximum cut is all 1600 edges.
// The host is modelled as in the small end-to-end test: it sends the tables,
// a random initial state and the noise lanes, streams annealed noise
// samples for one run ended by TLAST, and reads the clause register back.
// A reference model predicts every result word and the final readout.
module tb_hoim_top_full;
  import hoim_pkg::*;
  import fn_noise_pkg::*;
  localparam int ROWS = 20, COLS = 40, N = ROWS * COLS, E = 2 * N;
  localparam int M = 19176, NW = (M + 31) / 32, ITERS = 1000;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_axis_tdata = '0;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 0;
  logic running, solved;

  hoim_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_solved = 0, n_multi = 0, best = 0;

  typedef struct { logic [31:0] d; logic last; } word_t;
  word_t in_q [$], out_exp [$];

  int ea [E], eb [E];          // edge end points
  int adj [N][4];              // incident edges
  bit x [N];                   // reference spins
  logic signed [15:0] mum [N];
  int cc;

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
  endtask

  function automatic int cut();
    int c;
    c = 0;
    for (int k = 0; k < E; k++) if (x[ea[k]] != x[eb[k]]) c++;
    return c;
  endfunction

  task automatic build();
    int deg [N];
    for (int i = 0; i < N; i++) deg[i] = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int i;
        i = r * COLS + c;
        ea[2*i] = i; eb[2*i]   = r * COLS + (c + 1) % COLS;
        ea[2*i+1] = i; eb[2*i+1] = ((r + 1) % ROWS) * COLS + c;
      end
    for (int k = 0; k < E; k++) begin
      adj[ea[k]][deg[ea[k]]++] = k;
      adj[eb[k]][deg[eb[k]]++] = k;
    end
  endtask

  // colour = checkerboard parity, lane = rank within the colour
  function automatic int colour(int i); return ((i / COLS) + (i % COLS)) % 2; endfunction

  task automatic configure();
    for (int k = 0; k < E; k++) begin
      cmd(OP_SET_J, 0, k, 32'h1f);                       // -1
      cmd(OP_SET_MEMBER, 0, k, {1'b1, 15'd0, 16'(ea[k])});
      cmd(OP_SET_MEMBER, 1, k, {1'b1, 15'd0, 16'(eb[k])});
    end
    for (int i = 0; i < N; i++) begin
      for (int s = 0; s < 4; s++) cmd(OP_SET_NEIGH, s, i, {1'b1, 10'd0, 5'h1f, 16'(adj[i][s])});
      cmd(OP_SET_VAR, 0, i, {8'd0, 8'(colour(i)), 16'(-4)});
      cmd(OP_SET_LANE, 0, i, 32'(i / 2));
    end
    cmd(OP_SET_REG, 0, REG_NCOLORS, 32'd2);
    cmd(OP_SET_REG, 0, REG_TARGET, 32'(E));
    cmd(OP_SET_REG, 0, REG_OFFSET, 32'(E));
    cmd(OP_SET_REG, 0, REG_SHIFT, 32'd1);
    for (int i = 0; i < N; i++) x[i] = 1'($urandom);
    for (int w = 0; w < (E + 31) / 32; w++) begin
      logic [31:0] d;
      for (int b = 0; b < 32; b++) d[b] = (x[ea[32*w+b]] == x[eb[32*w+b]]);
      cmd(OP_SET_T, 0, w, d);
    end
    for (int l = 0; l < N; l++) begin
      mum[l] = 16'(-int'($urandom_range(0, 2)));
      cmd(OP_SET_NOISE, 0, l, 32'(mum[l]));
    end
  endtask

  // reference iteration: colour cc fires where its bipolar local field
  // sum_k J_k (2 T_k - 1) lies below the neuron's noise threshold
  task automatic ref_step(logic signed [15:0] nz);
    bit fire [N];
    int nf;
    nf = 0;
    for (int i = 0; i < N; i++) begin
      int q;
      q = 0;
      for (int s = 0; s < 4; s++) begin
        int k;
        k = adj[i][s];
        q += (x[ea[k]] == x[eb[k]]) ? -1 : 1;
      end
      fire[i] = (colour(i) == cc) && (q < int'(mum[i / 2]));
      if (fire[i]) nf++;
    end
    for (int i = 0; i < N; i++) if (fire[i]) x[i] = !x[i];
    if (nf > 1) n_multi++;
    cc ^= 1;
    for (int l = N-1; l > 0; l--) mum[l] = mum[l-1];
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

  always @(negedge clk) m_axis_tready <= ($urandom_range(0, 3) != 0);

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
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    build();
    configure();
    $display("configuration: %0d words, initial cut %0d of %0d", in_q.size(), cut(), E);
    cmd(OP_RUN, 0, 0, 0);
    cc = 0;
    for (int n = 0; n < ITERS; n++) begin
      logic signed [15:0] nz;
      int c;
      nz = fn_sample(3.0, 2.5, 8.0e4, 1.0e-2, longint'(n));
      in_q.push_back('{ {16'd0, nz}, (n == ITERS - 1) });
      ref_step(nz);
      c = cut();
      if (c > best) best = c;
      if (c == E) n_solved++;
      out_exp.push_back('{ {15'd0, (c == E), 16'(c)}, (n == ITERS - 1) });
    end
    cmd(OP_READ, 0, 0, 0);
    for (int w = 0; w < NW; w++) begin
      logic [31:0] d;
      d = '0;
      for (int b = 0; b < 32; b++) if (32*w + b < E) d[b] = (x[ea[32*w+b]] == x[eb[32*w+b]]);
      out_exp.push_back('{ d, (w == NW - 1) });
    end
    drive();
    while (out_exp.size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("best cut %0d of %0d, iterations at the maximum %0d, multi-flip iterations %0d", best, E, n_solved, n_multi);
    checks += 2;
    if (n_multi == 0) begin failures++; $display("FAIL no parallel flips"); end
    if (running) begin failures++; $display("FAIL still running"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
