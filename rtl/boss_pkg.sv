// boss_pkg -- constants and shared types of the BOSS (Branch-Outcome Side-channel
// Stream) unit.
//
// BOSS lets software hand the branch predictor the taken/not-taken outcomes of a
// chosen branch inside a loop, one outcome per loop iteration, before the front end
// fetches that branch. Software does so with ordinary stores into a dedicated
// address range; the unit keeps the outcomes per channel and overrides the
// conventional prediction when a fetched branch instance finds its outcome.
//
// The default sizes follow the configuration the design is built around: 4
// channels, 256 iterations per channel, a one-bit generation number (two
// generations), a one-level iteration stack and 64-bit program counters. The
// memory-map layout (base address, channel stride, offsets) and the vector-store
// width are this implementation's own choices.
package boss_pkg;

  // ---- sizes ------------------------------------------------------------------
  parameter int unsigned NUM_CH      = 4;    // simultaneous BOSS channels
  parameter int unsigned NUM_ITERS   = 256;  // iteration numbers 0..255 per channel
  parameter int unsigned GEN_W       = 1;    // generation number width (2 generations)
  parameter int unsigned STACK_DEPTH = 1;    // depth of the per-channel iter# stack
  parameter int unsigned PC_W        = 64;   // program-counter width (8-byte PCs)
  parameter int unsigned ADDR_W      = 64;   // physical address width of stores
  parameter int unsigned ST_BYTES    = 16;   // widest committed store (128-bit vector)

  // ---- memory map (own choice) ---------------------------------------------------
  // Channel c occupies BOSS_BASE + c*CH_STRIDE:
  //   offset 0 .. 255   one byte per iteration number; bit 0 = outcome (1 = taken)
  //   offset 256 .. 263 configuration word (BOSS_open / BOSS_close)
  parameter logic [63:0] BOSS_BASE   = 64'h0000_0000_F000_0000;
  parameter int unsigned CH_STRIDE   = 512;
  parameter int unsigned CFG_OFFSET  = 256;

  // Kind of a committed store after address decoding.
  typedef enum logic [1:0] {
    OP_NONE  = 2'd0,   // store outside the BOSS range
    OP_WRITE = 2'd1,   // BOSS_write: outcome bytes
    OP_OPEN  = 2'd2,   // BOSS_open: configuration word with non-zero offsets
    OP_CLOSE = 2'd3    // BOSS_close: configuration word of all zeros
  } boss_op_e;

  // Per-channel operation on a small counter table (gen# and iter# tables).
  typedef enum logic [2:0] {
    CNT_HOLD = 3'd0,
    CNT_INC  = 3'd1,
    CNT_DEC  = 3'd2,
    CNT_RST  = 3'd3,
    CNT_LOAD = 3'd4    // restore a value popped from the iter# stack
  } cnt_op_e;

endpackage
