// drnn_act_pipeline: Activation Pipeline of the DeltaRNN accelerator (Fig. 7).
// After each time step's matrix-vector work it computes the GRU output for
// every hidden unit n from the accumulated pre-activations M(t):
//   r = sigma(M_r), u = sigma(M_u), c = tanh(M_cx + r * M_ch),
//   h(t) = c + u * (h(t-1) - c)      (= (1-u) c + u h(t-1))
// The two products use the MxV unit's multiplier 0 (multiplier reuse), one
// per cycle, so a unit takes four cycles: read M, form r,u and start r*M_ch;
// add and tanh; start u*(h-c); add and write back (the last waits for
// out_ready). h(t) replaces h(t-1) in the local h memory,
// from which the input encoding unit reads h(t-1) for the next step, and is
// sent on the output stream (valid/ready) to external memory.
// sigma and tanh are the piecewise-linear "hard" forms
// sigma(x) = clamp(x/4 + 1/2, 0, 1), tanh(x) = clamp(x, -1, 1): this design's
// choice, as the paper does not give the non-linearity circuit. The GRU form
// is taken from the DeltaGRU network the paper names.
module drnn_act_pipeline
  import drnn_pkg::*;
#(
  parameter int unsigned NH = H,
  localparam int unsigned OW = $clog2(NH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          start,
  output logic          done,        // pulse when h(t) is complete
  output logic [31:0]   n_steps,     // steps completed since clear
  // M(t) read and multiplier reuse
  output logic [OW-1:0] m_rd_idx,
  input  m_t            m_r, m_u, m_cx, m_ch,
  output logic          mul_req,
  output q_t            mul_a,
  output q_t            mul_b,
  input  m_t            mul_p,
  // h(t-1) to the input encoding unit
  input  logic [OW-1:0] h_idx,
  output q_t            h_data,
  // h(t) to external memory
  output logic          out_valid,
  output q_t            out_data,
  input  logic          out_ready
);
  typedef enum logic [2:0] {P_IDLE, P_GATE, P_CAND, P_MUL2, P_OUT} pstate_e;
  pstate_e st;
  q_t   hmem [NH];
  logic [OW-1:0] n;
  q_t   u_q, mcx_q, hprev_q, c_q, h_new;
  logic signed [MW-1:0] cpre, hsum;
  logic signed [DW:0]   diff;

  function automatic q_t sat_q(input m_t v);   // Q16.16 -> Q8.8, saturating
    m_t s;
    s = v >>> FRAC;
    if (s > m_t'(32767)) return 16'sh7fff;
    if (s < m_t'(-32768)) return -16'sh8000;
    return q_t'(s);
  endfunction
  function automatic q_t hsig(input m_t v);
    m_t s;
    s = (v >>> (FRAC + 2)) + m_t'(1 << (FRAC - 1));
    if (s < 0) return '0;
    if (s > m_t'(1 << FRAC)) return q_t'(1 << FRAC);
    return q_t'(s);
  endfunction
  function automatic q_t htanh(input m_t s);     // s in Q8.8
    if (s > m_t'(1 << FRAC)) return q_t'(1 << FRAC);
    if (s < -m_t'(1 << FRAC)) return -q_t'(1 << FRAC);
    return q_t'(s);
  endfunction

  assign m_rd_idx = n;
  assign h_data   = hmem[h_idx];
  assign mul_req  = (st == P_GATE) || (st == P_MUL2);
  assign mul_a    = (st == P_GATE) ? hsig(m_r) : u_q;
  assign mul_b    = (st == P_GATE) ? sat_q(m_ch) : q_t'(diff);
  assign cpre     = m_t'(mcx_q) + (mul_p >>> FRAC);
  assign diff     = (DW+1)'(hprev_q) - (DW+1)'(c_q);
  assign hsum     = m_t'(c_q) + (mul_p >>> FRAC);
  assign h_new    = htanh(hsum);
  assign out_valid = (st == P_OUT);
  assign out_data  = h_new;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; n <= '0; done <= 1'b0; n_steps <= '0;
      u_q <= '0; mcx_q <= '0; hprev_q <= '0; c_q <= '0;
    end else if (clear) begin
      st <= P_IDLE; n <= '0; done <= 1'b0; n_steps <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        P_IDLE: if (start) begin n <= '0; st <= P_GATE; end
        P_GATE: begin
          u_q     <= hsig(m_u);
          mcx_q   <= sat_q(m_cx);
          hprev_q <= hmem[n];
          st      <= P_CAND;
        end
        P_CAND: begin
          c_q <= htanh(cpre);
          st  <= P_MUL2;
        end
        P_MUL2: begin
          st  <= P_OUT;
        end
        P_OUT: if (out_ready) begin
          if (n == OW'(NH - 1)) begin
            st <= P_IDLE; done <= 1'b1; n_steps <= n_steps + 32'd1;
          end else begin
            n <= n + 1'b1; st <= P_GATE;
          end
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (clear) for (int k = 0; k < NH; k++) hmem[k] <= '0;
    else if (st == P_OUT && out_ready) hmem[n] <= h_new;
  end
endmodule
