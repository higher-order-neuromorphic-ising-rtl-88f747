// axis_wrapper: AXI4-Stream front end of the solver.
//
// The host (through a DMA engine) sends 32-bit words on the slave stream and
// receives 32-bit words on the master stream. Outside a run, words come in
// pairs: a command header {op[31:28], idx_a[27:16], idx_b[15:0]} and one data
// word; table writes are passed to the core as a single cfg write. OP_RUN
// starts a run: from then on every accepted word is one noise sample
// (bits 15:0) and performs exactly one solver iteration, so the iteration
// count equals the number of samples sent. The word marked TLAST is the final
// sample: the core then stops and the clause register is frozen. A run word
// with bit 31 set is READ: the run halts without an iteration. OP_READ (or
// READ during a run) streams the clause register out as ceil(M/32) words,
// clause 32w+b in bit b of word w, TLAST on the last word.
// For each iteration one word {15'b0, SOLVED, SAT[15:0]} is returned, giving
// the state after that iteration, one clock after the sample is accepted.
// When the host stops sending or stops accepting results, the solver stalls.
// The paper describes this behaviour (stream in noise, stream out SAT, stop
// on the last sample, READ halts and reads T out); the word formats and the
// command set are this design's choice.
module axis_wrapper
  import hoim_pkg::*;
#(
  parameter int M_CLAUSES = 19176,
  localparam int NWORDS   = (M_CLAUSES + 31) / 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // slave stream (from DMA MM2S)
  input  logic [STREAM_W-1:0]   s_axis_tdata,
  input  logic                  s_axis_tvalid,
  input  logic                  s_axis_tlast,
  output logic                  s_axis_tready,
  // master stream (to DMA S2MM)
  output logic [STREAM_W-1:0]   m_axis_tdata,
  output logic                  m_axis_tvalid,
  output logic                  m_axis_tlast,
  input  logic                  m_axis_tready,
  // to/from the solver core
  output cfg_wr_t               cfg,
  output logic                  run_start,
  output logic                  step,
  output logic signed [NOISE_W-1:0] noise,
  input  logic [SAT_W-1:0]      sat,
  input  logic                  solved,
  input  logic [M_CLAUSES-1:0]  t_state,
  output logic                  running
);

  typedef enum logic [1:0] {S_HDR, S_DATA, S_RUN, S_READ} state_e;
  state_e state;

  logic [31:0]  hdr;
  logic         in_fire, out_fire;
  logic         res_pend, res_last;     // one SAT word waiting to be sent
  logic [15:0]  rd_word;
  logic         is_read_word;
  logic [STREAM_W-1:0] t_word;

  assign in_fire  = s_axis_tvalid && s_axis_tready;
  assign out_fire = m_axis_tvalid && m_axis_tready;
  assign running  = (state == S_RUN);

  // In a run a sample is accepted only when its result word can be queued.
  always_comb begin
    unique case (state)
      S_HDR, S_DATA: s_axis_tready = !res_pend;
      S_RUN:         s_axis_tready = !res_pend || m_axis_tready;
      default:       s_axis_tready = 1'b0;
    endcase
  end

  assign is_read_word = s_axis_tdata[RUN_READ_BIT];
  assign step         = (state == S_RUN) && in_fire && !is_read_word;
  assign noise        = s_axis_tdata[NOISE_W-1:0];
  assign run_start    = (state == S_DATA) && in_fire && (op_e'(hdr[31:28]) == OP_RUN);

  always_comb begin
    cfg       = '0;
    cfg.op    = op_e'(hdr[31:28]);
    cfg.idx_a = hdr[27:16];
    cfg.idx_b = hdr[15:0];
    cfg.data  = s_axis_tdata;
    cfg.valid = (state == S_DATA) && in_fire &&
                !(cfg.op inside {OP_RUN, OP_READ, OP_NOP});
  end

  // readout word of the clause register
  always_comb begin
    t_word = '0;
    for (int b = 0; b < 32; b++)
      if (32'(rd_word) * 32 + b < M_CLAUSES) t_word[b] = t_state[32'(rd_word) * 32 + b];
  end

  always_comb begin
    if (res_pend) begin
      m_axis_tvalid = 1'b1;
      m_axis_tdata  = {15'd0, solved, sat};
      m_axis_tlast  = res_last;
    end else begin
      m_axis_tvalid = (state == S_READ);
      m_axis_tdata  = t_word;
      m_axis_tlast  = (32'(rd_word) == NWORDS - 1);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_HDR;
      hdr      <= '0;
      res_pend <= 1'b0;
      res_last <= 1'b0;
      rd_word  <= '0;
    end else begin
      // result queue: filled by an iteration, drained by the master stream
      if (step) begin
        res_pend <= 1'b1;
        res_last <= s_axis_tlast;
      end else if (res_pend && m_axis_tready) begin
        res_pend <= 1'b0;
      end

      unique case (state)
        S_HDR:  if (in_fire) begin hdr <= s_axis_tdata; state <= S_DATA; end
        S_DATA: if (in_fire) begin
                  if (op_e'(hdr[31:28]) == OP_RUN)       state <= S_RUN;
                  else if (op_e'(hdr[31:28]) == OP_READ) begin state <= S_READ; rd_word <= '0; end
                  else                                   state <= S_HDR;
                end
        S_RUN:  if (in_fire) begin
                  if (is_read_word)      begin state <= S_READ; rd_word <= '0; end
                  else if (s_axis_tlast) state <= S_HDR;
                end
        S_READ: if (out_fire && !res_pend) begin
                  if (32'(rd_word) == NWORDS - 1) state <= S_HDR;
                  else rd_word <= rd_word + 1'b1;
                end
        default: state <= S_HDR;
      endcase
    end
  end

  // AXI4-Stream rule: a word offered and not taken stays offered, unchanged.
  a_m_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast));
  // Exactly one iteration per accepted noise sample, never otherwise.
  a_step_only_in_run: assert property (@(posedge clk) disable iff (!rst_n)
      step |-> state == S_RUN && in_fire);

endmodule
