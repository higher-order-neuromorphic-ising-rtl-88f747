// tb_color_counter: drives random advance/clear strobes for several colour
// counts and checks the colour and the end-of-sweep flag against a model.
module tb_color_counter;
  localparam int COLOR_W = 4;
  logic clk = 0, rst_n = 0, clear = 0, advance = 0;
  logic [COLOR_W:0] num_colors = 5'd7;
  logic [COLOR_W-1:0] color;
  logic wrapped;
  int model = 0, checks = 0, failures = 0, sweeps = 0;

  color_counter #(.COLOR_W(COLOR_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cfgi = 0; cfgi < 5; cfgi++) begin
      int nc;
      nc = (cfgi == 4) ? 0 : (cfgi == 3 ? 16 : $urandom_range(1, 12));
      @(negedge clk);
      num_colors = 5'(nc); clear = 1; advance = 0;
      @(posedge clk); model = 0;
      @(negedge clk); clear = 0;
      for (int it = 0; it < 500; it++) begin
        int eff_nc;
        eff_nc = (nc == 0) ? 1 : nc;
        @(negedge clk);
        advance = ($urandom_range(0, 3) != 0);
        clear   = ($urandom_range(0, 60) == 0);
        #1;
        checks++;
        if (wrapped !== (advance && (model == eff_nc - 1))) begin
          failures++; $display("FAIL wrapped nc=%0d model=%0d", nc, model);
        end
        if (wrapped) sweeps++;
        @(posedge clk);
        if (clear) model = 0;
        else if (advance) model = (model == eff_nc - 1) ? 0 : model + 1;
        #1;
        checks++;
        if (int'(color) != model) begin
          failures++; $display("FAIL colour nc=%0d got %0d expected %0d", nc, color, model);
        end
      end
    end
    checks++;
    if (sweeps == 0) begin failures++; $display("FAIL no sweep completed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
