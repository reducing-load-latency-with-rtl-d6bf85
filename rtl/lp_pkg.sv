// lp_pkg: types and constants shared by the cache level prediction blocks.
//
// A block of memory can be found in one of three levels below L1: the
// private L2, the shared L3 (LLC) or main memory. The LocMap stores one
// 2-bit location code per 64-byte block; a prediction is a mask of the
// levels to look up (one bit per level), so a single-way prediction has
// one bit set and a multi-way prediction two or three.
//
// From the paper: the three levels, 2 bits per block, 64-byte blocks,
// 256 blocks per LocMap line, 32-bit detector counters, a 2 KiB 2-way
// metadata cache and 16 GiB of memory. This design's own choices: the
// code values (memory is 2'b00 so a zero-filled table means "in memory"),
// the event and outcome encodings.
package lp_pkg;

  // 16 GiB of main memory (evaluated system) -> 34-bit physical address.
  localparam int unsigned PA_W        = 34;
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;          // 512
  localparam int unsigned OFFSET_W    = $clog2(LINE_BYTES);      // 6
  localparam int unsigned LOC_W       = 2;                       // bits per block
  localparam int unsigned SLOTS       = LINE_BITS / LOC_W;       // 256 blocks per LocMap line
  localparam int unsigned SLOT_W      = $clog2(SLOTS);           // 8
  // One LocMap line covers SLOTS * LINE_BYTES = 16 KiB of memory: PA >> 14.
  localparam int unsigned LM_SHIFT    = OFFSET_W + SLOT_W;       // 14
  localparam int unsigned LINE_ADDR_W = PA_W - OFFSET_W;         // 28

  // Location code held in the LocMap for every block.
  typedef enum logic [LOC_W-1:0] {
    LOC_MEM  = 2'b00,
    LOC_L2   = 2'b01,
    LOC_L3   = 2'b10,
    LOC_RSVD = 2'b11
  } loc_t;

  // Levels to look up; more than one bit set is a multi-way prediction.
  typedef struct packed {
    logic mem;
    logic l3;
    logic l2;
  } lvl_mask_t;

  // Cache events reported to the predictor (Fig. 9: fill and eviction).
  typedef enum logic [1:0] {
    EV_DEMAND_FILL   = 2'd0,
    EV_PREFETCH_FILL = 2'd1,
    EV_DIRTY_EVICT   = 2'd2
  } ev_kind_t;

  // Where the level that reports an event sits.
  typedef enum logic {
    CL_L2 = 1'b0,
    CL_L3 = 1'b1
  } cache_lvl_t;

  // What the directory side does with a request that skipped L2.
  typedef enum logic [2:0] {
    ACT_RESPOND_L3 = 3'd0,  // block is in the LLC: LLC answers
    ACT_FWD_MEM    = 3'd1,  // block only in memory: send the request to memory
    ACT_REISSUE_L2 = 3'd2,  // recovery: block is in the skipped L2
    ACT_REISSUE_L3 = 3'd3,  // recovery: memory-only prediction, block is in the LLC
    ACT_NONE       = 3'd4   // L2 was looked up in parallel and holds the block
  } dir_action_t;

  // Prediction outcome, the categories of the accuracy breakdown.
  typedef enum logic [1:0] {
    OUT_SEQUENTIAL = 2'd0,  // correctly predicted sequential
    OUT_SKIP       = 2'd1,  // correctly skipped at least one level
    OUT_OPP_LOSS   = 2'd2,  // looked up a level closer than needed (safe)
    OUT_HARMFUL    = 2'd3   // skipped the level holding the block: recovery
  } outcome_t;

  function automatic lvl_mask_t loc_to_mask(loc_t l);
    lvl_mask_t m;
    m = '0;
    unique case (l)
      LOC_L2:  m.l2  = 1'b1;
      LOC_L3:  m.l3  = 1'b1;
      default: m.mem = 1'b1;   // LOC_MEM, and the unused code
    endcase
    return m;
  endfunction

  // Nearest level of a prediction mask (L2 closest, memory farthest).
  function automatic loc_t mask_nearest(lvl_mask_t m);
    if (m.l2)      return LOC_L2;
    else if (m.l3) return LOC_L3;
    else           return LOC_MEM;
  endfunction

  // Distance of a level from the core: L2 = 0, L3 = 1, memory = 2.
  function automatic logic [1:0] loc_rank(loc_t l);
    unique case (l)
      LOC_L2:  return 2'd0;
      LOC_L3:  return 2'd1;
      default: return 2'd2;
    endcase
  endfunction

  // Outcome of a prediction against the block's actual level: the nearest
  // predicted level decides. Nearer than the block -> a wasted lookup
  // (opportunity loss, safe); farther -> the block's level was skipped
  // (harmful, needs recovery); equal -> correct, a skip unless it is L2.
  function automatic outcome_t classify(lvl_mask_t m, loc_t actual);
    logic [1:0] rn, ra;
    rn = loc_rank(mask_nearest(m));
    ra = loc_rank(actual);
    if (rn > ra)      return OUT_HARMFUL;
    else if (rn < ra) return OUT_OPP_LOSS;
    else if (ra == 2'd0) return OUT_SEQUENTIAL;
    else              return OUT_SKIP;
  endfunction

endpackage
