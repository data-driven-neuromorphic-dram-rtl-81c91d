// drnn_pkg: types and constants of the DeltaRNN accelerator (Fig. 7), which
// runs one delta-GRU layer. Activations, deltas and weights are 16-bit Q8.8
// fixed point (this design's choice; the paper gives 16-bit weights and
// states for its quantised networks). Pre-activation memories M hold 32-bit
// Q16.16 sums. The default sizes give a 768-unit hidden layer with up to 768
// inputs, the layer of the 2L-768H-DeltaGRU network named in the paper; the
// number of multipliers (NUM_PE) is this design's choice.
package drnn_pkg;
  localparam int unsigned DW     = 16;
  localparam int unsigned FRAC   = 8;
  localparam int unsigned MW     = 32;
  localparam int unsigned H      = 768;   // hidden units (paper: 768H)
  localparam int unsigned X      = 768;   // largest input vector (assumed)
  localparam int unsigned NUM_PE = 128;   // multipliers in the MxV unit (assumed)

  typedef logic signed [DW-1:0] q_t;   // Q8.8
  typedef logic signed [MW-1:0] m_t;   // Q16.16

  // gate memories of M(t): reset gate, update gate, candidate input part,
  // candidate hidden part (the last two are kept apart because the reset
  // gate multiplies only the hidden part)
  typedef enum logic [1:0] {G_R = 2'd0, G_U = 2'd1, G_CX = 2'd2, G_CH = 2'd3} gate_e;

  // one element of the NZVL / NZ1L stream: a delta above threshold and its
  // column index (0..X-1 for x, X.. for h); eot marks the end of a time step
  typedef struct packed {
    logic eot;
    q_t   delta;
    logic [$clog2(X+H)-1:0] idx;
  } nz_t;
endpackage
