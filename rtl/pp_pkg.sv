// pp_pkg: types and constants shared by the two-level perceptron prefetcher.
//
// Addresses are cache-line addresses: a 48-bit x86-64 virtual address with
// 64-byte lines leaves 45 bits, the width the paper gives for every stored
// line address. A program counter is kept at the full 48 virtual-address bits
// (this design's choice; the paper only says features combine PC and address
// bits). Each of the four perceptron features is quantized to 8 bits, so a
// feature vector is the 32-bit field the paper stores per table entry; the
// perceptron has five 8-bit weights (four features plus the threshold weight).
package pp_pkg;

  localparam int unsigned LINE_W   = 45;  // line address bits (48-bit VA, 64 B lines)
  localparam int unsigned PC_W     = 48;  // program counter bits
  localparam int unsigned FEAT_W   = 8;   // bits per quantized feature
  localparam int unsigned N_FEAT   = 4;   // features x1..x4 (constant input is separate)
  localparam int unsigned WEIGHT_W = 8;   // bits per perceptron weight

  typedef logic [LINE_W-1:0] line_t;
  typedef logic [PC_W-1:0]   pc_t;

  // Feature indices, in the order the paper's text lists them.
  localparam int unsigned F_DIST  = 0;  // x1: minimum distance of the block in the GHB
  localparam int unsigned F_TRANS = 1;  // x2: transition probability (sum of 2^(n-m)/k)
  localparam int unsigned F_XOR   = 2;  // x3: block address bits XOR PC bits
  localparam int unsigned F_OCC   = 3;  // x4: occurrence count of the block in the GHB

  typedef logic [N_FEAT-1:0][FEAT_W-1:0] feat_t;   // 32-bit perceptron input vector

  // First-level prefetcher that feeds the perceptron.
  typedef enum logic {PF_STRIDE = 1'b0, PF_MARKOV = 1'b1} pf_kind_e;

  // Event counters exported by the top (the quantities the evaluation reports).
  typedef struct packed {
    logic [31:0] triggers;     // cache misses that triggered the first level
    logic [31:0] suggestions;  // first-level suggestions handed to the perceptron
    logic [31:0] accepts;      // suggestions the perceptron accepted (prefetches issued)
    logic [31:0] denies;       // suggestions the perceptron denied
    logic [31:0] train_up;     // training steps with d-r = +1 (wrongly denied)
    logic [31:0] train_down;   // training steps with d-r = -1 (accepted, never used)
    logic [31:0] stall_cycles; // cycles a miss waited because the engine was busy
  } pf_stats_t;

endpackage
