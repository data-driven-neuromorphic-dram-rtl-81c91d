// nh_pkg: types and constants shared by the NullHop CNN accelerator blocks.
// Feature-map words are 16 bits (paper: 16-bit weights and states). A compressed
// pixel is a sequence of groups, one per 16 input channels: a 16-bit sparsity-map
// (SM) word whose bit i marks channel 16*g+i as non-zero, followed by the non-zero
// values of those channels in ascending channel order (the NZVL). Pixels follow
// in row-major order. The group width of 16 and the word layout are this
// design's choice; the paper gives only the SM bitmap plus NZVL scheme.
package nh_pkg;
  localparam int unsigned DW        = 16;      // pixel / weight width (paper)
  localparam int unsigned ACCW      = 32;      // accumulator width (assumed)
  localparam int unsigned SMW       = 16;      // channels per sparsity-map word (assumed)
  localparam int unsigned NUM_MAC   = 128;     // Fig. 5: MAC 0..MAC127
  localparam int unsigned NUM_CTRL  = 8;       // Fig. 5: Controller 0..7
  localparam int unsigned MACS_PER_CTRL = NUM_MAC / NUM_CTRL;
  localparam int unsigned KBANK_WORDS = 2304;  // Fig. 5: 4.5 KB per kernel bank
  localparam int unsigned PIX_WORDS = 262144;  // Fig. 5: 512 KB pixel memory
  localparam int unsigned MAX_W     = 256;     // widest image row (assumed)
  localparam int unsigned PT_ROWS   = 8;       // rows of pixel pointers kept (assumed)
  localparam int unsigned MAX_K     = 7;       // largest kernel (assumed)
  localparam int unsigned CHW       = 12;      // channel index width (2304 channels for 1x1)
  localparam int unsigned KAW       = $clog2(KBANK_WORDS);
  localparam int unsigned DIMW      = 9;       // image width / height field

  typedef logic signed [DW-1:0]   pix_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // Layer configuration written by the host before a layer is run.
  typedef struct packed {
    logic [DIMW-1:0] width;     // input = output width (stride 1, same padding)
    logic [DIMW-1:0] height;
    logic [CHW-1:0]  in_ch;     // input channels
    logic [7:0]      out_ch;    // output maps this pass, 1..128
    logic [2:0]      ksize;     // odd kernel size 1..7
    logic            pool;      // 2x2 max pooling on the fly
    logic            relu;      // apply ReLU
    logic [4:0]      shift;     // accumulator >> shift gives the 16-bit output
  } nh_cfg_t;

  // One broadcast beat from the pixel allocator to the controllers.
  typedef struct packed {
    logic          valid;   // a non-zero pixel value
    logic          last;    // end of an output pixel: MACs hand over their sums
    pix_t          value;
    logic [KAW-1:0] kaddr;  // kernel bank address ((ch*K+ky)*K+kx)
  } nh_beat_t;
endpackage
