// deltarnn_top: the DeltaRNN accelerator (Fig. 7) running one delta-GRU layer
// of NH hidden units with up to NX inputs. Per time step x(t) arrives on the
// input stream from external memory; the input encoding unit sends only the
// deltas of x(t) and h(t-1) whose magnitude reaches theta; the MxV controller
// fetches the weight column of each from the on-chip BRAM and the MxV unit
// adds delta * column to the pre-activation memories M; at the end of the step
// the activation pipeline computes h(t) and writes it to the output stream.
// Setup: load the weight BRAM (w_wr_*), pulse clear, then load the biases
// into M (m_wr_*: gates r, u, candidate-input; the candidate-hidden memory
// starts at 0). Cycle cost per step: n_x + NH (examine) overlapping with
// NCH = 3*NH/NPE per sent delta, then 4*NH for the activations.
module deltarnn_top
  import drnn_pkg::*;
#(
  parameter int unsigned NX  = X,
  parameter int unsigned NH  = H,
  parameter int unsigned NPE = NUM_PE,
  localparam int unsigned NCH = 3 * NH / NPE,
  localparam int unsigned WAW = $clog2((NX + NH) * NCH),
  localparam int unsigned OW  = $clog2(NH),
  localparam int unsigned IW  = $clog2(X + H)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  q_t                theta,
  input  logic [IW-1:0]     n_x,
  input  logic              w_wr_en,
  input  logic [WAW-1:0]    w_wr_addr,
  input  logic [NPE*DW-1:0] w_wr_data,
  input  logic              m_wr_en,
  input  gate_e             m_wr_gate,
  input  logic [OW-1:0]     m_wr_idx,
  input  m_t                m_wr_data,
  input  logic              x_valid,
  input  q_t                x_data,
  output logic              x_ready,
  output logic              h_valid,
  output q_t                h_out,
  input  logic              h_ready,
  output logic              step_done,
  output logic [31:0]       n_sent,
  output logic [31:0]       n_seen,
  output logic [31:0]       n_chunks,
  output logic [31:0]       n_steps
);
  logic nz_valid, nz_ready, w_rd_en, s_valid, act_start, mul_req;
  nz_t  nz;
  logic [WAW-1:0] w_rd_addr;
  logic [NPE*DW-1:0] w_data;
  q_t   s_delta, mul_a, mul_b, h_data;
  gate_e s_gate;
  logic [OW-1:0] s_off, m_rd_idx, h_idx;
  m_t   m_r, m_u, m_cx, m_ch, mul_p;
  logic [31:0] enc_steps;
  logic hprev_ready;

  // h(t-1) is complete once the activation pipeline has finished every step
  // the encoder has closed
  assign hprev_ready = (n_steps == enc_steps);

  drnn_input_encoding #(.NX(NX), .NH(NH)) u_enc (
    .clk, .rst_n, .clear, .theta, .n_x, .x_valid, .x_data, .x_ready,
    .h_ready(hprev_ready), .h_idx, .h_data, .nz_valid, .nz, .nz_ready,
    .n_sent, .n_seen, .n_steps(enc_steps)
  );

  drnn_mxv_ctrl #(.NX(NX), .NH(NH), .NPE(NPE)) u_ctrl (
    .clk, .rst_n, .clear, .nz_valid, .nz, .nz_ready, .w_rd_en, .w_rd_addr,
    .s_valid, .s_delta, .s_gate, .s_off, .act_start, .act_done(step_done),
    .n_chunks
  );

  drnn_weight_bram #(.NX(NX), .NH(NH), .NPE(NPE)) u_bram (
    .clk, .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_data)
  );

  drnn_mxv_unit #(.NH(NH), .NPE(NPE)) u_mxv (
    .clk, .rst_n, .s_valid, .s_delta, .s_gate, .s_off, .w_data, .m_wr_en,
    .m_wr_gate, .m_wr_idx, .m_wr_data, .m_rd_idx, .m_r, .m_u, .m_cx, .m_ch,
    .mul_req, .mul_a, .mul_b, .mul_p
  );

  drnn_act_pipeline #(.NH(NH)) u_act (
    .clk, .rst_n, .clear, .start(act_start), .done(step_done), .n_steps,
    .m_rd_idx, .m_r, .m_u, .m_cx, .m_ch, .mul_req, .mul_a, .mul_b, .mul_p,
    .h_idx, .h_data, .out_valid(h_valid), .out_data(h_out), .out_ready(h_ready)
  );
endmodule
