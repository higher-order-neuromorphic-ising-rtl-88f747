// color_counter: selects which colour group of latent neurons may fire.
//
// Variables of one colour share no clause, so all of them can be updated in
// the same iteration. The counter steps once per iteration (advance) through
// 0 .. num_colors-1 and wraps, so every colour gets one iteration in turn; the
// paper's FPGA design does the same with a counter compared against each
// neuron's colour. `wrapped` flags the iteration that finishes a sweep.
// clear returns to colour 0 (used at the start of each run; this design's
// choice). num_colors of 0 behaves like 1. Timing: registered output.
module color_counter #(
  parameter int COLOR_W = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               advance,
  input  logic [COLOR_W:0]   num_colors,
  output logic [COLOR_W-1:0] color,
  output logic               wrapped
);

  logic last;
  assign last    = ({1'b0, color} + 1'b1) >= num_colors;
  assign wrapped = advance && last;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) color <= '0;
    else if (advance)    color <= last ? '0 : color + 1'b1;
  end

endmodule
