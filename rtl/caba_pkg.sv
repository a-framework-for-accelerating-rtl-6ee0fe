// caba_pkg: types and constants shared by the assist-warp (CABA) blocks.
//
// Widths follow the simulated SM where one is given (48 warps per SM,
// 32 threads per warp); the rest are this design's choices: a 4-bit
// compression encoding, subroutine IDs formed as {is_store, encoding}
// (the paper indexes the store by the line's encoding and a load/store
// bit), 16 instructions per subroutine, 64-bit instruction words and
// 8-bit register IDs.
package caba_pkg;

  localparam int unsigned WARP_SIZE   = 32;   // threads per warp (Table 1)
  localparam int unsigned ENC_W       = 4;    // compression encoding width
  localparam int unsigned SR_ID_W     = ENC_W + 1; // {is_store, encoding}
  localparam int unsigned NUM_SR      = 1 << SR_ID_W;
  localparam int unsigned INST_ID_W   = 4;    // up to 16 instructions per subroutine
  localparam int unsigned MAX_INST    = 1 << INST_ID_W;
  localparam int unsigned INST_W      = 64;   // one decoded assist-warp instruction
  localparam int unsigned REG_ID_W    = 8;    // architectural register ID
  localparam int unsigned NUM_LIVE    = 3;    // two live-in and one live-out register

  typedef logic [WARP_SIZE-1:0] lane_mask_t;
  typedef logic [SR_ID_W-1:0]   sr_id_t;
  typedef logic [INST_ID_W-1:0] inst_id_t;
  typedef logic [INST_W-1:0]    inst_word_t;
  typedef logic [REG_ID_W-1:0]  reg_id_t;

  // Priority of an assist warp (Sec. 3.2.3): high = blocking, always ahead of
  // the parent warp; low = only in idle cycles.
  typedef enum logic {PRIO_LOW = 1'b0, PRIO_HIGH = 1'b1} prio_e;

  // Live-in / live-out register IDs kept with an assist-warp instance.
  typedef struct packed {
    reg_id_t [NUM_LIVE-1:0] regs;
  } live_regs_t;

  // A decoded assist-warp instruction as staged in the assist warp buffer.
  typedef struct packed {
    inst_word_t  inst;
    sr_id_t      sr_id;
    inst_id_t    inst_id;
    logic        is_last;   // last instruction of the subroutine
    prio_e       prio;
    lane_mask_t  mask;
    live_regs_t  live;
  } aw_inst_t;

endpackage
