// hoim_top: the solver IP of the higher-order neuromorphic Ising machine,
// i.e. the programmable-logic part of the design: the AXI4-Stream wrapper
// and the graph-coloured solver core. Its ports are the two 32-bit streams
// that an AXI DMA engine connects to, plus clock, reset and two status
// bits. Stream protocol and timing: see axis_wrapper; the iteration: see
// solver_core. Parameter defaults size the core for an 800-variable,
// 19176-clause problem (the largest instances the paper runs on its FPGA);
// the neighbourhood bound, lane count and colour width are this design's
// choices.
module hoim_top
  import hoim_pkg::*;
#(
  parameter int N_VARS    = 800,
  parameter int M_CLAUSES = 19176,
  parameter int MAX_NEIGH = 128,
  parameter int MAX_ORDER = 3,
  parameter int LANES     = 800,
  parameter int COLOR_W   = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [STREAM_W-1:0] s_axis_tdata,
  input  logic                s_axis_tvalid,
  input  logic                s_axis_tlast,
  output logic                s_axis_tready,
  output logic [STREAM_W-1:0] m_axis_tdata,
  output logic                m_axis_tvalid,
  output logic                m_axis_tlast,
  input  logic                m_axis_tready,
  output logic                running,
  output logic                solved
);

  cfg_wr_t                   cfg;
  logic                      run_start, step;
  logic signed [NOISE_W-1:0] noise;
  logic [SAT_W-1:0]          sat;
  logic signed [31:0]        objective;
  logic [M_CLAUSES-1:0]      t_state;
  logic [N_VARS-1:0]         fired;
  logic [COLOR_W-1:0]        cur_color;
  logic                      sweep_done;

  axis_wrapper #(.M_CLAUSES(M_CLAUSES)) u_wrap (
    .clk, .rst_n,
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tlast, .s_axis_tready,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tlast, .m_axis_tready,
    .cfg, .run_start, .step, .noise, .sat, .solved, .t_state, .running
  );

  solver_core #(
    .N_VARS(N_VARS), .M_CLAUSES(M_CLAUSES), .MAX_NEIGH(MAX_NEIGH),
    .MAX_ORDER(MAX_ORDER), .LANES(LANES), .COLOR_W(COLOR_W)
  ) u_core (
    .clk, .rst_n, .cfg, .run_start, .step, .noise,
    .sat, .solved, .objective, .t_state, .fired, .cur_color, .sweep_done
  );

endmodule
