// tb_sat_calc: (1) random clause bits, weights, offset and shift against the
// affine formula; (2) a MAX-CUT case (J = -1 per edge, offset = edges,
// shift = 1) and an XOR-SAT case (J = +-1, offset = M, shift = 1) against an
// independent count of cut edges / satisfied equations.
module tb_sat_calc;
  localparam int M = 16;
  logic [M-1:0] t;
  logic signed [4:0] j [M];
  logic signed [31:0] offset;
  logic [4:0] shift;
  logic [15:0] target, sat;
  logic solved;
  logic signed [31:0] objective;
  int checks = 0, failures = 0, n_solved = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sat_calc #(.M_CLAUSES(M)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int obj, s;
      t = M'($urandom);
      for (int k = 0; k < M; k++) j[k] = 5'(int'($urandom_range(0, 31)) - 16);
      offset = 32'(int'($urandom_range(0, 1000)));
      shift  = 5'($urandom_range(0, 3));
      obj = 0;
      for (int k = 0; k < M; k++) obj += t[k] ? int'(j[k]) : -int'(j[k]);
      s = (obj + int'(offset)) >>> shift;
      target = ($urandom_range(0, 1) == 0) ? 16'(s) : 16'($urandom);
      #1;
      checks += 3;
      if (objective != obj) begin failures++; $display("FAIL objective %0d vs %0d", objective, obj); end
      if (sat != 16'(s)) begin failures++; $display("FAIL sat %0d vs %0d", sat, s); end
      if (solved !== (16'(s) == target)) begin failures++; $display("FAIL solved"); end
      if (solved) n_solved++;
      @(posedge clk);
    end
    // application formulas
    for (int it = 0; it < 500; it++) begin
      int cut, eqs;
      bit cutmode;
      logic [M-1:0] b;
      cutmode = it[0];
      t = M'($urandom);
      b = M'($urandom);
      cut = 0; eqs = 0;
      for (int k = 0; k < M; k++) begin
        j[k] = cutmode ? -5'sd1 : (b[k] ? -5'sd1 : 5'sd1);
        // T_k = 1 means bipolar +1 (endpoints agree / parity even)
        if (cutmode && !t[k]) cut++;
        if (!cutmode && ((t[k] ? 1 : -1) == (b[k] ? -1 : 1))) eqs++;
      end
      offset = M; shift = 1; target = 16'(M);
      #1;
      checks++;
      if (int'(sat) != (cutmode ? cut : eqs)) begin
        failures++; $display("FAIL %s sat %0d vs %0d", cutmode ? "cut" : "xorsat", sat, cutmode ? cut : eqs);
      end
      @(posedge clk);
    end
    checks++; if (n_solved == 0) begin failures++; $display("FAIL solved never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
