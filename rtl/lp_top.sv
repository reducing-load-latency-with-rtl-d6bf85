// lp_top: one core's cache level prediction subsystem.
//
// It sits on the L1 miss path and decides, for every L1 miss, which of the
// levels below L1 to look up, instead of always walking L2 -> LLC -> memory
// in turn. The parts and the path of a request:
//
//  1. level_predictor (LocMap metadata cache + Popular Levels Detector)
//     gives a level mask one cycle after the L1 miss.
//  2. Routing. If the mask holds L2, L2 is looked up (l2_req). If it holds
//     the LLC or memory, the request is also sent past L2 to the LLC and
//     directory (llc_req, carrying the mask) and an L2 MSHR entry is taken
//     for it in bypass_mshr without an L2 lookup. A mask of L2 alone is the
//     ordinary sequential walk and takes no bypass entry. If no bypass entry
//     is free the request falls back to the sequential walk.
//  3. The LLC's tag and directory lookup returns where the block really is
//     (dir_*). mispredict_detector decides: the LLC answers, the request goes
//     on to memory, or, on a harmful misprediction, a recovery request goes
//     to the level that holds the block. A recovery to L2 frees the bypass
//     MSHR entry at once, since L2 then answers L1 itself.
//  4. Responses to bypassed or parallel requests (from L2, LLC or memory)
//     come back through bypass_mshr: the first one fills L1, later
//     duplicates of a multi-way lookup are dropped by address matching.
//
// The caches, directory and memory themselves are outside this module: their
// lookups, events and responses are ports. Cache events (demand / prefetch
// fills, dirty evictions) maintain the LocMap; the level that served each L1
// miss (hit_*) trains the detector. LocMap lines move on the mem_* ports.
//
// Timing: prediction and routing one cycle after l1m_valid; the detector's
// decision one cycle after dir_valid; an L1 fill one cycle after resp_valid.
// From the paper: the structure of Fig. 9, the request flows of Fig. 11 and
// the recovery rule. This design's own choices: the port protocol, how
// parallel lookups are issued, the fallback when the MSHRs are full.
module lp_top
  import lp_pkg::*;
#(
  parameter int unsigned P_W          = PA_W,
  parameter int unsigned CACHE_BYTES  = 2048,
  parameter int unsigned WAYS         = 2,
  parameter int unsigned CNT_W        = 32,
  parameter int unsigned THRESH_ONE   = 16,
  parameter int unsigned THRESH_TWO   = 24,
  parameter int unsigned MSHR_ENTRIES = 16,
  localparam int unsigned LA_W        = P_W - OFFSET_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [LA_W-1:0]      base_line,
  // L1 miss
  input  logic                 l1m_valid,
  input  logic [P_W-1:0]       l1m_pa,
  // prediction made (observation)
  output logic                 pred_valid,
  output lvl_mask_t            pred_mask,
  output logic [1:0]           pred_ways,
  output logic                 pred_from_map,
  output logic                 pred_fallback,   // bypass MSHRs full: sequential walk
  // requests issued
  output logic                 l2_req_valid,    // look L2 up
  output logic [P_W-1:0]       l2_req_pa,
  output logic                 llc_req_valid,   // send past L2 to the LLC / directory
  output logic [P_W-1:0]       llc_req_pa,
  output lvl_mask_t            llc_req_mask,
  // LLC / directory lookup result of a request sent past L2
  input  logic                 dir_valid,
  input  logic [P_W-1:0]       dir_pa,
  input  lvl_mask_t            dir_mask,
  input  loc_t                 dir_actual,
  // directory-side decision
  output logic                 act_valid,
  output logic [P_W-1:0]       act_pa,
  output dir_action_t          act,
  output logic                 release_l3_mshr,
  output logic                 mispredict,
  output outcome_t             outcome,
  // responses to bypassed / parallel requests and the L1 fill
  input  logic                 resp_valid,
  input  logic [P_W-1:0]       resp_pa,
  input  loc_t                 resp_src,
  output logic                 l1_fill_valid,
  output logic [LA_W-1:0]      l1_fill_line,
  output loc_t                 l1_fill_src,
  output logic [3:0]           l1_fill_targets,
  output logic                 resp_dropped,
  output logic [$clog2(MSHR_ENTRIES+1)-1:0] mshr_occupancy,
  // training and LocMap maintenance
  input  logic                 hit_valid,
  input  loc_t                 hit_level,
  input  logic                 ev_valid,
  input  ev_kind_t             ev_kind,
  input  cache_lvl_t           ev_level,
  input  logic [P_W-1:0]       ev_pa,
  output logic                 ev_applied,      // event written or queued in the LocMap
  // LocMap lines to and from memory
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

  // ---------------- prediction ----------------
  logic           p_valid, p_from_map;
  logic [P_W-1:0] p_pa;
  lvl_mask_t      p_mask;

  level_predictor #(
    .P_W (P_W), .CACHE_BYTES (CACHE_BYTES), .WAYS (WAYS), .CNT_W (CNT_W),
    .THRESH_ONE (THRESH_ONE), .THRESH_TWO (THRESH_TWO)
  ) u_lp (
    .clk, .rst_n, .base_line,
    .req_valid (l1m_valid), .req_pa (l1m_pa),
    .pred_valid (p_valid), .pred_pa (p_pa), .pred_mask (p_mask),
    .pred_ways (pred_ways), .pred_from_map (p_from_map),
    .ev_valid, .ev_kind, .ev_level, .ev_pa, .ev_applied,
    .hit_valid, .hit_level,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_line, .mem_rd_resp_valid, .mem_rd_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_line, .mem_wr_data
  );

  // ---------------- routing ----------------
  logic      byp_want, byp_ok, mshr_ready;
  lvl_mask_t route_mask;

  always_comb begin
    byp_want   = p_valid && (p_mask.l3 || p_mask.mem);
    byp_ok     = byp_want && mshr_ready;
    route_mask = p_mask;
    if (byp_want && !mshr_ready) route_mask = '{mem: 1'b0, l3: 1'b0, l2: 1'b1};

    pred_valid    = p_valid;
    pred_mask     = route_mask;
    pred_from_map = p_from_map;
    pred_fallback = byp_want && !mshr_ready;

    l2_req_valid  = p_valid && route_mask.l2;
    l2_req_pa     = p_pa;
    llc_req_valid = byp_ok;
    llc_req_pa    = p_pa;
    llc_req_mask  = route_mask;
  end

  // ---------------- directory-side detection ----------------
  mispredict_detector #(.P_W (P_W)) u_det (
    .clk, .rst_n,
    .dir_valid, .dir_pa, .dir_mask, .dir_actual,
    .act_valid, .act_pa, .act, .release_l3_mshr, .mispredict, .outcome
  );

  // ---------------- bypass MSHRs and return path ----------------

  bypass_mshr #(.ENTRIES (MSHR_ENTRIES), .LA_W (LA_W)) u_mshr (
    .clk, .rst_n,
    .alloc_valid (byp_ok), .alloc_line (p_pa[P_W-1:OFFSET_W]), .alloc_ready (mshr_ready),
    .resp_valid, .resp_line (resp_pa[P_W-1:OFFSET_W]), .resp_src,
    .dealloc_valid (act_valid && act == ACT_REISSUE_L2),
    .dealloc_line  (act_pa[P_W-1:OFFSET_W]),
    .l1_fill_valid, .l1_fill_line, .l1_fill_src, .l1_fill_targets,
    .resp_dropped, .occupancy (mshr_occupancy)
  );

endmodule
