// tb_global_arbiter: grant must be one-hot inside the active set (zero when
// none is active) and equal the first active neuron at or after the start
// index taken from a reference xorshift32 model; with all neurons active
// every neuron must be picked about equally often.
module tb_global_arbiter;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, step = 0, seed_load = 0;
  logic [31:0] seed = '0;
  logic [N-1:0] active = '0, grant;
  logic [31:0] st;
  int hist [N];
  int checks = 0, failures = 0;

  global_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
    return x;
  endfunction

  function automatic logic [N-1:0] expect_grant(logic [N-1:0] a, logic [31:0] s);
    int r;
    r = int'(s % N);
    for (int o = 0; o < N; o++) if (a[(r + o) % N]) return N'(1) << ((r + o) % N);
    return '0;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) hist[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1; seed_load = 1; seed = 32'd12345;
    @(posedge clk); st = 32'd12345;
    @(negedge clk) seed_load = 0;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      active = (it < 10000) ? N'($urandom) & N'($urandom) : '1;
      step   = ($urandom_range(0, 3) != 0);
      #1;
      checks += 2;
      if (grant !== expect_grant(active, st)) begin
        failures++; $display("FAIL grant %b active %b", grant, active);
      end
      if (!((grant & ~active) == '0 && $countones(grant) == ((active != 0) ? 1 : 0))) begin
        failures++; $display("FAIL not one-hot in active set");
      end
      if (it >= 10000 && step) for (int i = 0; i < N; i++) if (grant[i]) hist[i]++;
      @(posedge clk);
      if (step) st = xs(st);
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (hist[i] < 500 || hist[i] > 1000) begin failures++; $display("FAIL histogram %0d: %0d", i, hist[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
