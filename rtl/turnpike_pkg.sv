// turnpike_pkg: types and constants shared by the Turnpike soft-error
// resilience unit.
//
// The unit sits between the commit stage of an in-order core and the L1
// data cache. The core hands it one committed operation per cycle (a load, a
// regular store, a checkpoint store or a region boundary); the unit decides
// whether each store is quarantined in the gated store buffer until its
// region is verified or released to the cache at once.
//
// Sizes that follow the paper: 4-entry store buffer, 2-entry committed load
// queue, 4 colors per register, 32 architectural registers, 10-cycle WCDL,
// 32-bit addresses (a 2-entry CLQ of two addresses per entry is 16 bytes).
// This design's own choices: 64-bit store data, one committed memory
// operation or boundary per cycle, a 4-entry region boundary buffer.
package turnpike_pkg;

  localparam int unsigned ADDR_W   = 32;  // CLQ: 2 entries x 2 addresses = 16 bytes
  localparam int unsigned DATA_W   = 64;  // AArch64 register width (own choice)
  localparam int unsigned PC_W     = 32;
  localparam int unsigned NREG     = 32;  // registers with checkpoint colors
  localparam int unsigned NCOLORS  = 4;   // 4-color pool per register
  localparam int unsigned SB_DEPTH = 4;   // Cortex-A53 store buffer
  localparam int unsigned CLQ_ENTRIES = 2;
  localparam int unsigned RBB_DEPTH = 4;  // own choice
  localparam int unsigned WCDL     = 10;  // default worst-case detection latency
  localparam int unsigned TIME_W   = 16;  // width of the region time stamp
  localparam int unsigned GRAN_BITS = 3;  // address bits below one 8-byte word

  localparam int unsigned REG_W    = $clog2(NREG);
  localparam int unsigned COLOR_W  = $clog2(NCOLORS);
  // Region ids must tell apart every region that can be live at once:
  // the RBB_DEPTH ended-but-unverified regions plus the open one.
  localparam int unsigned RID_W    = $clog2(RBB_DEPTH + 1) + 1;

  // Checkpoint storage: color c of register r lives at
  // base + c * COLOR_STRIDE, where base is the address the compiler gave the
  // checkpoint (the color-0 slot of r). One slot of DATA_W bits per register.
  localparam logic [ADDR_W-1:0] COLOR_STRIDE = ADDR_W'(NREG * (DATA_W / 8));

  typedef enum logic [2:0] {
    OP_NONE     = 3'd0,
    OP_LOAD     = 3'd1,
    OP_STORE    = 3'd2,  // regular store (program store or spill)
    OP_CKPT     = 3'd3,  // checkpoint store of a live-out register
    OP_BOUNDARY = 3'd4   // region boundary instruction
  } op_e;

  // One committed operation from the core.
  typedef struct packed {
    op_e                    op;
    logic [PC_W-1:0]        pc;       // PC of the instruction
    logic [ADDR_W-1:0]      addr;     // load/store address
    logic [DATA_W-1:0]      data;     // store data
    logic [REG_W-1:0]       ckpt_reg; // register saved by a checkpoint
  } commit_t;

  // Used-color entry of one register in one region.
  typedef struct packed {
    logic               valid;
    logic               q;      // fallback: color taken without fast release
    logic [COLOR_W-1:0] color;
  } ucol_t;

  // States of the selective fast-release control (Fig. 13 of the paper).
  typedef enum logic [1:0] {
    FR_SEARCH   = 2'd0, // search CLQ for WAR dependence: fast release enabled
    FR_DISALLOW = 2'd1, // disallow CLQ insertion and clear CLQ
    FR_ALLOW    = 2'd2  // allow CLQ insertion, fast release still disabled
  } fr_state_e;

  // One-cycle event strobes, for performance counters and tests.
  typedef struct packed {
    logic store_quarantined;  // store entered the GSB
    logic fast_regular;       // WAR-free regular store released at once
    logic fast_ckpt;          // colored checkpoint released at once
    logic ckpt_fallback;      // checkpoint found no free color
    logic war_hit;            // regular store conflicted with the CLQ range
    logic sb_full_stall;      // commit stalled on a full GSB
    logic rbb_full_stall;     // commit stalled on a full RBB
    logic clq_overflow;       // CLQ had no entry for a region's loads
    logic region_verified;
    logic gsb_release;        // one verified store written to the cache
    logic recovery;           // redirect to the recovery PC issued
    logic parity_error;
  } events_t;

endpackage
