// drnn_mxv_ctrl: MxV Controller of the DeltaRNN accelerator (Fig. 7). It pops
// one {delta, index} element of the NZVL/NZ1L stream and turns the index into
// the NCH consecutive weight BRAM addresses of that column (index*NCH + k),
// one per cycle, while streaming the delta with its destination (gate memory
// and row offset) to the MxV unit, registered so that it meets the BRAM data.
// Columns of x feed the candidate's input memory, columns of h its hidden
// memory. On an end-of-step token it starts the activation pipeline and then
// takes no new element until the pipeline reports done, so M(t) is stable
// while it is read. Throughput: NCH cycles per non-zero delta, 0 per delta
// below threshold. The sequencing is this design's choice; the paper gives
// the block's role (addresses from NZ1L, NZVL streamed to the MxV unit).
module drnn_mxv_ctrl
  import drnn_pkg::*;
#(
  parameter int unsigned NX  = X,
  parameter int unsigned NH  = H,
  parameter int unsigned NPE = NUM_PE,
  localparam int unsigned NCH = 3 * NH / NPE,
  localparam int unsigned CPG = NH / NPE,
  localparam int unsigned AW  = $clog2((NX + NH) * NCH),
  localparam int unsigned OW  = $clog2(NH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          nz_valid,
  input  nz_t           nz,
  output logic          nz_ready,
  // weight BRAM read
  output logic          w_rd_en,
  output logic [AW-1:0] w_rd_addr,
  // scheduled NZVL to the MxV unit (aligned with the BRAM read data)
  output logic          s_valid,
  output q_t            s_delta,
  output gate_e         s_gate,
  output logic [OW-1:0] s_off,
  // activation pipeline
  output logic          act_start,
  input  logic          act_done,
  output logic [31:0]   n_chunks     // BRAM words fetched since clear
);
  localparam int unsigned IW = $clog2(X + H);
  typedef enum logic [1:0] {C_POP, C_WAIT} cstate_e;
  cstate_e st;
  logic [$clog2(NCH+1)-1:0] k;
  logic [$clog2(CPG+1)-1:0] gk;
  logic [1:0] g;
  logic       busy_col;

  assign busy_col  = (st == C_POP) && nz_valid && !nz.eot;
  assign w_rd_en   = busy_col;
  assign w_rd_addr = AW'(nz.idx) * AW'(NCH) + AW'(k);
  assign nz_ready  = (st == C_POP) && (nz.eot || k == ($bits(k))'(NCH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_POP; k <= '0; gk <= '0; g <= '0; s_valid <= 1'b0; s_delta <= '0;
      s_gate <= G_R; s_off <= '0; act_start <= 1'b0; n_chunks <= '0;
    end else if (clear) begin
      st <= C_POP; k <= '0; gk <= '0; g <= '0; s_valid <= 1'b0;
      act_start <= 1'b0; n_chunks <= '0;
    end else begin
      s_valid   <= 1'b0;
      act_start <= 1'b0;
      unique case (st)
        C_POP: if (nz_valid) begin
          if (nz.eot) begin
            act_start <= 1'b1;
            st <= C_WAIT;
          end else begin
            s_valid  <= 1'b1;
            s_delta  <= nz.delta;
            s_gate   <= (g == 2'd2) ? ((nz.idx >= IW'(NX)) ? G_CH : G_CX) : gate_e'(g);
            s_off    <= OW'(gk) * OW'(NPE);
            n_chunks <= n_chunks + 32'd1;
            if (k == ($bits(k))'(NCH - 1)) begin
              k <= '0; gk <= '0; g <= '0;
            end else begin
              k <= k + 1'b1;
              if (gk == ($bits(gk))'(CPG - 1)) begin gk <= '0; g <= g + 2'd1; end
              else gk <= gk + 1'b1;
            end
          end
        end
        C_WAIT: if (act_done) st <= C_POP;
        default: st <= C_POP;
      endcase
    end
  end
endmodule
