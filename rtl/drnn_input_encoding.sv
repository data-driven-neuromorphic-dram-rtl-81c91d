// drnn_input_encoding: Input Encoding Unit of the DeltaRNN accelerator
// (Fig. 7). Per time step it first takes the n_x elements of x(t) from the
// input stream, then reads the H elements of h(t-1) from the activation
// pipeline. For each element it forms the delta against the value it last
// propagated for that element; only if |delta| > theta is the delta sent
// (NZVL value with its NZ1L index) and the stored reference updated, so small
// changes cost no weight fetch at all (the DeltaNet principle of the paper).
// An end-of-step token follows the last element. Output is a valid/ready
// stream; one element is examined per cycle. `clear` zeroes the references
// at the start of a sequence. h(t-1) is read only after h_ready (the
// activation pipeline has finished step t-1).
// The threshold rule (only a change of more than theta is sent) follows the
// paper; element order and the one-element-per-cycle rate are this design's
// choices.
module drnn_input_encoding
  import drnn_pkg::*;
#(
  parameter int unsigned NX = X,
  parameter int unsigned NH = H,
  localparam int unsigned IW = $clog2(X + H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  q_t            theta,
  input  logic [IW-1:0] n_x,        // inputs used by this layer, <= NX
  // x(t) from the input stream
  input  logic          x_valid,
  input  q_t            x_data,
  output logic          x_ready,
  // h(t-1) from the activation pipeline
  input  logic          h_ready,
  output logic [$clog2(NH)-1:0] h_idx,
  input  q_t            h_data,
  // NZVL / NZ1L stream
  output logic          nz_valid,
  output nz_t           nz,
  input  logic          nz_ready,
  output logic [31:0]   n_sent,     // deltas sent since clear
  output logic [31:0]   n_seen,     // elements examined since clear
  output logic [31:0]   n_steps     // end-of-step tokens sent since clear
);
  typedef enum logic [1:0] {E_X, E_H, E_EOT} estate_e;
  estate_e st;
  q_t xref [NX];
  q_t href [NH];
  logic [IW-1:0] i;
  q_t   v, r;
  logic signed [DW:0] d;
  logic big, have, take;

  assign h_idx = $clog2(NH)'(i);
  assign v     = (st == E_X) ? x_data : h_data;
  assign r     = (st == E_X) ? xref[i[$clog2(NX)-1:0]] : href[h_idx];
  assign d     = (DW+1)'(v) - (DW+1)'(r);
  assign big   = (d > (DW+1)'(theta)) || (-d > (DW+1)'(theta));
  assign have  = (st == E_X) ? x_valid : (st == E_H) ? h_ready : 1'b1;

  assign nz_valid = have && (st == E_EOT || big);
  assign nz.eot   = (st == E_EOT);
  assign nz.delta = (d > (DW+1)'(32767)) ? 16'sh7fff : (d < -(DW+1)'(32768)) ? -16'sh8000 : q_t'(d);
  assign nz.idx   = (st == E_X) ? i : IW'(NX) + i;
  assign take     = have && (!nz_valid || nz_ready);
  assign x_ready  = (st == E_X) && take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_X; i <= '0; n_sent <= '0; n_seen <= '0; n_steps <= '0;
    end else if (clear) begin
      st <= E_X; i <= '0; n_sent <= '0; n_seen <= '0; n_steps <= '0;
    end else if (take) begin
      if (st != E_EOT) n_seen <= n_seen + 32'd1;
      if (nz_valid && st != E_EOT) n_sent <= n_sent + 32'd1;
      unique case (st)
        E_X: if (i == n_x - 1'b1) begin i <= '0; st <= E_H; end else i <= i + 1'b1;
        E_H: if (i == IW'(NH - 1)) begin i <= '0; st <= E_EOT; end else i <= i + 1'b1;
        default: begin st <= E_X; n_steps <= n_steps + 32'd1; end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int k = 0; k < NX; k++) xref[k] <= '0;
      for (int k = 0; k < NH; k++) href[k] <= '0;
    end else if (take && nz_valid) begin
      if (st == E_X) xref[i[$clog2(NX)-1:0]] <= v;
      else if (st == E_H) href[h_idx] <= v;
    end
  end
endmodule
