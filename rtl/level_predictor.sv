// level_predictor: the per-core cache level predictor on the L1 miss path.
//
// For every L1 miss the block's physical address is turned into a LocMap
// line address and slot (locmap_addr_gen) and looked up in the metadata
// cache (catalog_cache). One cycle later the prediction is out:
//   * metadata hit  -> a single-way prediction, the level the LocMap records;
//   * metadata miss -> the Popular Levels Detector's one-, two- or three-way
//                      prediction, while the LocMap line is fetched in the
//                      background for later misses.
// The added latency on the L1 miss path is therefore one cycle.
//
// The LocMap is kept up to date from cache events (fill and dirty eviction
// reports of L2 and L3):
//   demand fill into L2 / L3   -> block now in L2 / L3 (update even on a
//                                 metadata miss: the line is fetched)
//   prefetch fill into L2 / L3 -> same code, but only if the metadata hits
//   dirty eviction from L2     -> block now in L3 (written back there)
//   dirty eviction from L3     -> block now in memory
// Clean evictions and coherence invalidations are not reported, so codes can
// be stale; mispredictions are caught and repaired further down the path.
// Separately, the level that finally served each L1 miss trains the Popular
// Levels Detector (hit_valid / hit_level).
//
// From the paper: the LocMap plus metadata cache plus detector organisation,
// the LocMap address mapping, which events update the LocMap, and the one
// cycle of added latency. This design's own choices: which code a dirty
// eviction writes (the level the write-back goes to), one event per cycle,
// and the port handshakes.
module level_predictor
  import lp_pkg::*;
#(
  parameter int unsigned P_W         = PA_W,
  parameter int unsigned CACHE_BYTES = 2048,
  parameter int unsigned WAYS        = 2,
  parameter int unsigned CNT_W       = 32,
  parameter int unsigned THRESH_ONE  = 16,
  parameter int unsigned THRESH_TWO  = 24,
  localparam int unsigned LA_W       = P_W - OFFSET_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [LA_W-1:0]      base_line,     // LocMap base (64-byte line address)
  // prediction request: an L1 miss
  input  logic                 req_valid,
  input  logic [P_W-1:0]       req_pa,
  output logic                 pred_valid,    // one cycle after req_valid
  output logic [P_W-1:0]       pred_pa,
  output lvl_mask_t            pred_mask,
  output logic [1:0]           pred_ways,
  output logic                 pred_from_map, // 1: LocMap hit, 0: detector
  // cache events that maintain the LocMap
  input  logic                 ev_valid,
  input  ev_kind_t             ev_kind,
  input  cache_lvl_t           ev_level,
  input  logic [P_W-1:0]       ev_pa,
  output logic                 ev_applied,    // one cycle after ev_valid: written or queued
  // the level that served an L1 miss (trains the detector)
  input  logic                 hit_valid,
  input  loc_t                 hit_level,
  // LocMap line traffic to and from memory
  output logic                 mem_rd_valid,
  input  logic                 mem_rd_ready,
  output logic [LA_W-1:0]      mem_rd_line,
  input  logic                 mem_rd_resp_valid,
  input  logic [LINE_BITS-1:0] mem_rd_resp_data,
  output logic                 mem_wr_valid,
  input  logic                 mem_wr_ready,
  output logic [LA_W-1:0]      mem_wr_line,
  output logic [LINE_BITS-1:0] mem_wr_data
);

  logic [LA_W-1:0]   lk_line, up_line;
  logic [SLOT_W-1:0] lk_slot, up_slot;

  locmap_addr_gen #(.P_W(P_W), .LA_W(LA_W)) u_lk_addr (
    .base_line (base_line), .pa (req_pa), .lm_line (lk_line), .slot (lk_slot)
  );
  locmap_addr_gen #(.P_W(P_W), .LA_W(LA_W)) u_up_addr (
    .base_line (base_line), .pa (ev_pa),  .lm_line (up_line), .slot (up_slot)
  );

  // Event -> new location code and whether it may allocate.
  loc_t up_loc;
  logic up_alloc;
  always_comb begin
    unique case (ev_kind)
      EV_DIRTY_EVICT: up_loc = (ev_level == CL_L2) ? LOC_L3 : LOC_MEM;
      default:        up_loc = (ev_level == CL_L2) ? LOC_L2 : LOC_L3;
    endcase
    up_alloc = (ev_kind != EV_PREFETCH_FILL);
  end

  logic lk_resp_valid, lk_resp_hit;
  loc_t lk_resp_loc;
  logic up_resp_valid, up_resp_hit, up_resp_queued, up_resp_dropped, cc_busy;

  catalog_cache #(.CACHE_BYTES(CACHE_BYTES), .WAYS(WAYS), .LA_W(LA_W)) u_cc (
    .clk, .rst_n,
    .lk_valid (req_valid), .lk_line (lk_line), .lk_slot (lk_slot),
    .lk_resp_valid, .lk_resp_hit, .lk_resp_loc,
    .up_valid (ev_valid), .up_line (up_line), .up_slot (up_slot),
    .up_loc (up_loc), .up_alloc (up_alloc),
    .up_resp_valid, .up_resp_hit, .up_resp_queued, .up_resp_dropped,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_line, .mem_rd_resp_valid, .mem_rd_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_line, .mem_wr_data,
    .busy (cc_busy)
  );

  lvl_mask_t  pld_mask;
  logic [1:0] pld_ways;
  logic [CNT_W-1:0] cnt_l2, cnt_l3, cnt_mem;

  popular_level_detector #(
    .CNT_W (CNT_W), .THRESH_ONE (THRESH_ONE), .THRESH_TWO (THRESH_TWO)
  ) u_pld (
    .clk, .rst_n,
    .hit_valid, .hit_level,
    .pred_mask (pld_mask), .pred_ways (pld_ways),
    .cnt_l2, .cnt_l3, .cnt_mem
  );

  logic [P_W-1:0] pa_q;
  always_ff @(posedge clk) if (req_valid) pa_q <= req_pa;

  always_comb begin
    pred_valid    = lk_resp_valid;
    pred_pa       = pa_q;
    pred_from_map = lk_resp_hit;
    if (lk_resp_hit) begin
      pred_mask = loc_to_mask(lk_resp_loc);
      pred_ways = 2'd1;
    end else begin
      pred_mask = pld_mask;
      pred_ways = pld_ways;
    end
  end

  assign ev_applied = up_resp_valid && (up_resp_hit || up_resp_queued);

endmodule
