// sparse_accel_top: the two data-driven accelerators side by side: the
// NullHop CNN accelerator, which skips the MACs of zero activations (spatial
// sparsity), and the DeltaRNN accelerator, which skips the weight fetches of
// inputs and states that changed by less than a threshold (temporal
// sparsity). The two share only clock and reset; each keeps its own streams
// to external memory (DRAM for NullHop, DDR3 for DeltaRNN), which are ports
// here. Placing both in one top is this design's choice: they are presented
// as separate accelerators.
module sparse_accel_top
  import nh_pkg::nh_cfg_t;
  import drnn_pkg::*;
#(
  parameter int unsigned CNN_WORDS = nh_pkg::PIX_WORDS,  // pixel memory words
  parameter int unsigned RNN_NX    = X,                  // RNN inputs
  parameter int unsigned RNN_NH    = H,                  // RNN hidden units
  parameter int unsigned RNN_NPE   = NUM_PE              // RNN multipliers
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // NullHop: layer control and DRAM streams
  input  logic                 cnn_start,
  input  nh_cfg_t              cnn_cfg,
  input  logic                 cnn_in_valid,
  input  logic [15:0]          cnn_in_data,
  output logic                 cnn_in_ready,
  output logic                 cnn_out_valid,
  output logic [15:0]          cnn_out_data,
  input  logic                 cnn_out_ready,
  output logic                 cnn_done,
  output logic [31:0]          cnn_nz_beats,
  output logic [31:0]          cnn_sm_words,
  output logic [31:0]          cnn_pix_out,
  output logic [31:0]          cnn_words_out,
  // DeltaRNN: setup, DDR3 streams
  input  logic                 rnn_clear,
  input  q_t                   rnn_theta,
  input  logic [$clog2(X+H)-1:0] rnn_n_x,
  input  logic                 rnn_w_wr_en,
  input  logic [$clog2((RNN_NX+RNN_NH)*3*RNN_NH/RNN_NPE)-1:0] rnn_w_wr_addr,
  input  logic [RNN_NPE*DW-1:0] rnn_w_wr_data,
  input  logic                 rnn_m_wr_en,
  input  gate_e                rnn_m_wr_gate,
  input  logic [$clog2(RNN_NH)-1:0] rnn_m_wr_idx,
  input  m_t                   rnn_m_wr_data,
  input  logic                 rnn_x_valid,
  input  q_t                   rnn_x_data,
  output logic                 rnn_x_ready,
  output logic                 rnn_h_valid,
  output q_t                   rnn_h_out,
  input  logic                 rnn_h_ready,
  output logic                 rnn_step_done,
  output logic [31:0]          rnn_n_sent,
  output logic [31:0]          rnn_n_seen,
  output logic [31:0]          rnn_n_chunks,
  output logic [31:0]          rnn_n_steps
);
  nullhop_top #(.WORDS(CNN_WORDS)) u_cnn (
    .clk, .rst_n, .start(cnn_start), .cfg(cnn_cfg), .in_valid(cnn_in_valid),
    .in_data(cnn_in_data), .in_ready(cnn_in_ready), .out_valid(cnn_out_valid),
    .out_data(cnn_out_data), .out_ready(cnn_out_ready), .done(cnn_done),
    .nz_beats(cnn_nz_beats), .sm_words(cnn_sm_words), .pix_out(cnn_pix_out),
    .words_out(cnn_words_out)
  );

  deltarnn_top #(.NX(RNN_NX), .NH(RNN_NH), .NPE(RNN_NPE)) u_rnn (
    .clk, .rst_n, .clear(rnn_clear), .theta(rnn_theta), .n_x(rnn_n_x),
    .w_wr_en(rnn_w_wr_en), .w_wr_addr(rnn_w_wr_addr), .w_wr_data(rnn_w_wr_data),
    .m_wr_en(rnn_m_wr_en), .m_wr_gate(rnn_m_wr_gate), .m_wr_idx(rnn_m_wr_idx),
    .m_wr_data(rnn_m_wr_data), .x_valid(rnn_x_valid), .x_data(rnn_x_data),
    .x_ready(rnn_x_ready), .h_valid(rnn_h_valid), .h_out(rnn_h_out),
    .h_ready(rnn_h_ready), .step_done(rnn_step_done), .n_sent(rnn_n_sent),
    .n_seen(rnn_n_seen), .n_chunks(rnn_n_chunks), .n_steps(rnn_n_steps)
  );
endmodule
