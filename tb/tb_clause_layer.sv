// tb_clause_layer: random member tables and spike vectors; sigma must be the
// parity of the fired members and T must toggle exactly where sigma is 1 on
// an enabled clock, load 32 bits per word, and hold otherwise.
module tb_clause_layer;
  localparam int N = 8, M = 40, P = 3;
  logic clk = 0, rst_n = 0, en = 0, load_en = 0;
  logic [N-1:0] q = '0;
  logic mb_valid [M][P];
  logic [2:0] mb_var [M][P];
  logic [15:0] load_addr = '0;
  logic [31:0] load_data = '0;
  logic [M-1:0] sigma, t, model;
  int checks = 0, failures = 0, toggles = 0;

  clause_layer #(.N_VARS(N), .M_CLAUSES(M), .MAX_ORDER(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [M-1:0] exp_sigma();
    logic [M-1:0] s;
    for (int k = 0; k < M; k++) begin
      s[k] = 1'b0;
      for (int m = 0; m < P; m++) if (mb_valid[k][m]) s[k] ^= q[mb_var[k][m]];
    end
    return s;
  endfunction

  initial begin
    for (int k = 0; k < M; k++)
      for (int m = 0; m < P; m++) begin
        mb_valid[k][m] = ($urandom_range(0, 3) != 0);
        mb_var[k][m]   = 3'($urandom_range(0, N-1));
      end
    model = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    checks++; if (t !== '0) begin failures++; $display("FAIL reset"); end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      if (it % 500 == 0)
        for (int k = 0; k < M; k++)
          for (int m = 0; m < P; m++) begin
            mb_valid[k][m] = ($urandom_range(0, 3) != 0);
            mb_var[k][m]   = 3'($urandom_range(0, N-1));
          end
      q         = N'($urandom);
      en        = ($urandom_range(0, 3) != 0);
      load_en   = ($urandom_range(0, 15) == 0);
      load_addr = 16'($urandom_range(0, 1));
      load_data = $urandom;
      #1;
      checks++;
      if (sigma !== exp_sigma()) begin failures++; $display("FAIL sigma %h vs %h", sigma, exp_sigma()); end
      @(posedge clk);
      if (load_en) begin
        for (int b = 0; b < 32; b++) if (load_addr * 32 + b < M) model[load_addr * 32 + b] = load_data[b];
      end else if (en) begin
        model = model ^ exp_sigma();
        if (|exp_sigma()) toggles++;
      end
      #1;
      checks++;
      if (t !== model) begin failures++; $display("FAIL T %h vs %h", t, model); end
    end
    checks++; if (toggles == 0) begin failures++; $display("FAIL no toggles"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
