// llc_pkg: constants and types shared by the randomized last-level cache.
//
// The defaults describe the main configuration of the design: a 1024-set,
// 16-way randomized set-associative LLC with 64-byte blocks, remapped every
// 10 evictions per cache block, with an attack detector that samples every
// 4096 LLC accesses, uses an EMA discount factor of 1/32 and a threshold of 5.
// The 32-bit physical address (26-bit line address) and the fixed-point
// format of the detector are this implementation's own choices.
package llc_pkg;

  localparam int unsigned SETS_DEFAULT        = 1024; // S
  localparam int unsigned WAYS_DEFAULT        = 16;   // W
  localparam int unsigned LINE_ADDR_W_DEFAULT = 26;   // 32-bit address, 64 B block
  localparam int unsigned ENC_ROUNDS_DEFAULT  = 4;    // Feistel rounds of the index encryptor

  // Remap period counted in LLC evictions per cache block (EV-10).
  localparam int unsigned EV_PER_BLOCK_DEFAULT = 10;
  // Multi-step relocation: 0 means unlimited chain length, 1 is the
  // single-step relocation of the original CEASER remap.
  localparam int unsigned MAX_RELOC_DEFAULT    = 0;

  // Attack detector.
  localparam int unsigned SAMPLE_DEFAULT    = 4096; // LLC accesses per sample period
  localparam int unsigned THRESHOLD_DEFAULT = 5;    // th, az >= th triggers a remap
  localparam int unsigned EMA_SHIFT_DEFAULT = 5;    // alpha = 2^-5 = 1/32
  localparam int unsigned CNT_W_DEFAULT     = 13;   // per-set eviction counter width
  localparam int unsigned FRAC_W_DEFAULT    = 8;    // fraction bits of the scores
  localparam int unsigned AZ_W_DEFAULT      = 24;   // width of a stored EMA score

  typedef enum logic [0:0] {
    OP_ACCESS = 1'b0,  // read/fetch a block (allocates on a miss)
    OP_FLUSH  = 1'b1   // remove a block from the LLC (clflush)
  } llc_op_e;

  // Owner of the shared metadata array port.
  typedef enum logic [1:0] {
    OWN_NONE    = 2'd0,
    OWN_CTRL    = 2'd1,
    OWN_TRACKER = 2'd2
  } array_owner_e;

endpackage
