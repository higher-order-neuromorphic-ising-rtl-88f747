// tb_noise_vector: checks the noise shift register against a queue model:
// direct loads land in the addressed stage, each shift moves every stage by
// one and inserts the new sample at stage 0, shift wins over load, reset
// clears everything and nothing changes when neither strobe is high.
module tb_noise_vector;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0;
  logic load_en = 0, shift_en = 0;
  logic [2:0] load_idx = '0;
  logic signed [15:0] load_val = '0, sample_in = '0;
  logic signed [15:0] mu [LANES];
  logic signed [15:0] model [LANES];
  int checks = 0, failures = 0;

  noise_vector #(.LANES(LANES), .NOISE_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int j = 0; j < LANES; j++) begin
      checks++;
      if (mu[j] !== model[j]) begin
        failures++;
        $display("FAIL %s stage %0d: got %0d expected %0d", what, j, mu[j], model[j]);
      end
    end
  endtask

  initial begin
    for (int j = 0; j < LANES; j++) model[j] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    compare("reset");
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      load_en   = ($urandom_range(0, 2) == 0);
      shift_en  = ($urandom_range(0, 2) == 0);
      load_idx  = 3'($urandom_range(0, LANES-1));
      load_val  = 16'($urandom);
      sample_in = 16'($urandom);
      @(posedge clk);
      if (shift_en) begin
        for (int j = LANES-1; j > 0; j--) model[j] = model[j-1];
        model[0] = sample_in;
      end else if (load_en) begin
        model[load_idx] = load_val;
      end
      #1 compare("step");
    end
    @(negedge clk); rst_n = 0; load_en = 0; shift_en = 0;
    @(posedge clk); #1 rst_n = 1;
    for (int j = 0; j < LANES; j++) model[j] = '0;
    compare("reset2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
