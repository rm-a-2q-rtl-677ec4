// a2q_pkg: sizes, types and constants shared by the aggregation-aware
// quantized GNN accelerator.
//
// The compute unit has 256 processing engines (PEs) of 16 bit-serial MACs
// each; weights are 4-bit; node features are serialized and carry a per-node
// bitwidth. The four on-chip memories are sized 2 MB (input features), 2 MB
// (output features), 256 KB (edges) and 256 KB (weights). These figures are
// the paper's. The 8-bit feature container, the 24-bit partial sum and the
// 16-bit fixed-point scale format (12 fraction bits) are this design's own
// choices.
package a2q_pkg;

  // Compute unit (paper: 256 PEs x 16 MACs, 4-bit weights)
  localparam int unsigned NUM_PE      = 256;
  localparam int unsigned MACS_PER_PE = 16;
  localparam int unsigned W_BITS      = 4;

  // Feature container: one byte per feature, any bitwidth 1..8 inside it
  localparam int unsigned FEAT_BITS   = 8;
  localparam int unsigned NBITS_W     = 4;      // field that holds 1..8

  // Partial sums and rescaling
  localparam int unsigned PSUM_W      = 24;
  localparam int unsigned SCALE_W     = 16;
  localparam int unsigned SCALE_FRAC  = 12;
  localparam int unsigned VAL_W       = 32;     // |value| in Q20.12 for NNS

  // Memory sizes in bytes (paper: 2MB, 2MB, 256KB, 256KB)
  localparam int unsigned FEATURE_BUF_BYTES = 2 * 1024 * 1024;
  localparam int unsigned EDGE_BUF_BYTES    = 256 * 1024;
  localparam int unsigned WEIGHT_BUF_BYTES  = 256 * 1024;

  // Derived memory shapes
  localparam int unsigned FB_WORD_BYTES = MACS_PER_PE * FEAT_BITS / 8;               // 16
  localparam int unsigned FB_DEPTH      = FEATURE_BUF_BYTES / NUM_PE / FB_WORD_BYTES; // 512
  localparam int unsigned WB_DEPTH      = WEIGHT_BUF_BYTES / (MACS_PER_PE * W_BITS / 8); // 32768
  localparam int unsigned EB_DEPTH      = EDGE_BUF_BYTES / 4;                          // 65536

  // Nearest Neighbor Strategy: number of (s, b) groups (paper: m = 1000)
  localparam int unsigned NNS_ENTRIES = 1000;

  // Output columns whose scale factors the accelerator keeps on chip
  localparam int unsigned MAX_COLS = 1024;

  // Quantization parameters of one node for the layer being run
  typedef struct packed {
    logic [NBITS_W-1:0] bits_in;   // bitwidth of this node's input features
    logic               signed_in; // input features are two's complement
    logic [SCALE_W-1:0] scale_u;   // update phase: step size of the node
    logic [NBITS_W-1:0] bits_out;  // bitwidth of the aggregated output
    logic [SCALE_W-1:0] scale_a;   // aggregation: 1 / next step size
  } node_meta_t;

  typedef enum logic [1:0] {
    PH_IDLE   = 2'd0,
    PH_UPDATE = 2'd1,   // B = X W
    PH_AGG    = 2'd2    // X' = A B
  } phase_e;

endpackage
