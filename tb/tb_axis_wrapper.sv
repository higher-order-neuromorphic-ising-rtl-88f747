// tb_axis_wrapper: drives the stream wrapper with random gaps on the input
// stream and random back-pressure on the output stream; a small model of the
// core answers each iteration (its SAT value becomes the noise sample just
// consumed). Checks: every configuration command reaches the core once with
// the right fields, RUN/READ do not; one iteration per noise word; one result
// word per iteration in order, TLAST on the final one; the run stops after
// the TLAST sample; READ inside a run halts it and reads the clause register
// out; READ outside a run does the same. Stalls are counted.
module tb_axis_wrapper;
  import hoim_pkg::*;
  localparam int M = 70;              // 3 readout words
  localparam int NW = (M + 31) / 32;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_axis_tdata = '0;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 0;
  cfg_wr_t cfg;
  logic run_start, step, running;
  logic signed [15:0] noise;
  logic [15:0] sat = '0;
  logic solved;
  logic [M-1:0] t_state;

  axis_wrapper #(.M_CLAUSES(M)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_steps = 0, n_in_stall = 0, n_out_stall = 0, n_runstart = 0;

  typedef struct { logic [31:0] d; logic last; } word_t;
  word_t in_q [$], out_exp [$];
  cfg_wr_t cfg_exp [$];

  assign solved = (sat == 16'h0123);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // core model
  always_ff @(posedge clk) if (step) sat <= noise;

  task automatic cmd(op_e op, int a, int b, logic [31:0] d);
    in_q.push_back('{ {op, 12'(a), 16'(b)}, 1'b0 });
    in_q.push_back('{ d, 1'b0 });
    if (!(op inside {OP_RUN, OP_READ, OP_NOP})) cfg_exp.push_back('{1'b1, op, 12'(a), 16'(b), d});
  endtask

  task automatic readout_exp(logic [M-1:0] tv);
    for (int w = 0; w < NW; w++) begin
      logic [31:0] x;
      x = '0;
      for (int b = 0; b < 32; b++) if (w * 32 + b < M) x[b] = tv[w * 32 + b];
      out_exp.push_back('{ x, (w == NW - 1) });
    end
  endtask

  task automatic run_words(int n, bit end_with_read);
    for (int i = 0; i < n; i++) begin
      logic [15:0] nz;
      bit last;
      nz = 16'($urandom);
      if (i == n / 2) nz = 16'h0123;   // make SOLVED appear once
      last = !end_with_read && (i == n - 1);
      in_q.push_back('{ {1'b0, 15'($urandom), nz}, last });
      out_exp.push_back('{ {15'd0, (nz == 16'h0123), nz}, last });
    end
    if (end_with_read) begin
      in_q.push_back('{ 32'h8000_0000, 1'b0 });
      readout_exp(t_state);
    end
  endtask

  // input driver
  initial begin
    t_state = {$urandom, $urandom, $urandom};
    wait (rst_n);
    // scenario
    for (int i = 0; i < 40; i++) begin
      op_e op;
      op = op_e'($urandom_range(1, 8));
      cmd(op, $urandom_range(0, 4095), $urandom_range(0, 65535), $urandom);
    end
    cmd(OP_NOP, 0, 0, 0);
    cmd(OP_RUN, 0, 0, 0);   run_words(50, 0);
    cmd(OP_SET_REG, 0, 1, 32'd7);
    cmd(OP_RUN, 0, 0, 0);   run_words(30, 1);
    cmd(OP_READ, 0, 0, 0);  readout_exp(t_state);
    cmd(OP_RUN, 0, 0, 0);   run_words(20, 0);
    while (in_q.size() > 0) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        s_axis_tvalid = 0;
      end else begin
        s_axis_tvalid = 1;
        s_axis_tdata  = in_q[0].d;
        s_axis_tlast  = in_q[0].last;
      end
      @(posedge clk);
      if (s_axis_tvalid && !s_axis_tready) n_in_stall++;
      if (s_axis_tvalid && s_axis_tready) void'(in_q.pop_front());
    end
    @(negedge clk) s_axis_tvalid = 0;
  end

  // output sink and checkers
  always @(negedge clk) m_axis_tready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) begin
    if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
    if (m_axis_tvalid && m_axis_tready) begin
      checks++;
      if (out_exp.size() == 0) begin
        failures++; $display("FAIL unexpected output %h", m_axis_tdata);
      end else begin
        word_t e;
        e = out_exp.pop_front();
        if (m_axis_tdata !== e.d || m_axis_tlast !== e.last) begin
          failures++; $display("FAIL output %h/%b expected %h/%b", m_axis_tdata, m_axis_tlast, e.d, e.last);
        end
      end
    end
    if (cfg.valid) begin
      checks++;
      if (cfg_exp.size() == 0 || cfg !== cfg_exp[0]) begin
        failures++; $display("FAIL cfg write %p", cfg);
      end
      if (cfg_exp.size() > 0) void'(cfg_exp.pop_front());
    end
    if (step) begin
      n_steps++;
      checks++;
      if (!running) begin failures++; $display("FAIL step outside run"); end
    end
    if (run_start) n_runstart++;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (in_q.size() == 0 && out_exp.size() == 0 && n_steps > 0);
    repeat (20) @(posedge clk);
    checks += 6;
    if (n_steps != 100)      begin failures++; $display("FAIL steps %0d", n_steps); end
    if (n_runstart != 3)     begin failures++; $display("FAIL run starts %0d", n_runstart); end
    if (cfg_exp.size() != 0) begin failures++; $display("FAIL %0d cfg writes missing", cfg_exp.size()); end
    if (running)             begin failures++; $display("FAIL still running"); end
    if (n_in_stall == 0)     begin failures++; $display("FAIL input never stalled"); end
    if (n_out_stall == 0)    begin failures++; $display("FAIL output never stalled"); end
    $display("steps=%0d input-stalls=%0d output-stalls=%0d", n_steps, n_in_stall, n_out_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
