// catalog_cache: the per-core metadata cache of the LocMap.
//
// Holds recently used 64-byte LocMap lines (256 two-bit location codes each)
// in a small set-associative array: 2 KiB, 2 ways, so 16 sets of 2 lines by
// default. It has two request ports that work in the same cycle:
//
//  * lookup (the prediction path, on every L1 miss): the location code of one
//    block. The answer (hit flag and code) is registered and appears one
//    cycle after the request. A miss starts a fetch of the LocMap line from
//    memory in the background; the caller does not wait for it.
//  * update (LocMap maintenance): writes one block's code. On a hit the code
//    is written at the clock edge and the line becomes dirty. On a miss the
//    update is kept only when up_alloc is set (demand fills and dirty
//    evictions): it waits in a small update queue, the line is fetched, and
//    the code is written into it on arrival. Prefetch fills come with
//    up_alloc low and are dropped on a miss, as the paper prescribes.
//
// One line fetch is outstanding at a time. When idle, the fetch engine takes
// a lookup miss first (unless the update queue is full), otherwise the line
// of the oldest queued update. Whatever line arrives, every queued update for
// it is written into it (oldest first) as it is installed and leaves the
// queue; an update arriving in the install cycle goes in last. So the line of
// a queued update is never in the cache, and a lookup never sees a line with
// updates still owed to it. An update to the line sitting in the write-back
// buffer is written into that buffer. Only when the queue is full is an
// allocating update dropped; that only leaves the LocMap stale, which the
// predictor tolerates. Replacement is LRU (one bit per set), an invalid way
// first. A dirty victim is written back to memory before the next fetch.
//
// Memory side: valid/ready request for a line read, a response strobe with
// the 512-bit line one or more cycles later, and a valid/ready line write.
// Line addresses are 64-byte line numbers. Every update gets a response one
// cycle later: hit (written), queued, or dropped. busy is high while a fetch
// or write-back runs or updates are queued.
//
// From the paper: 2 KiB capacity, 2-way, 64-byte lines, filled on a miss
// through the memory hierarchy, updates only on demand fills, dirty evictions
// and prefetch fills that hit. This design's own choices: LRU, the single
// fetch engine, the 4-entry update queue and its ordering rule, write-back of
// modified lines, the handshakes and the one-cycle lookup latency (chosen to
// match the paper's one cycle added to an L1 miss).
module catalog_cache
  import lp_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 2048,
  parameter int unsigned WAYS        = 2,
  parameter int unsigned LA_W        = LINE_ADDR_W,
  parameter int unsigned UPQ_DEPTH   = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lookup port
  input  logic                 lk_valid,
  input  logic [LA_W-1:0]      lk_line,
  input  logic [SLOT_W-1:0]    lk_slot,
  output logic                 lk_resp_valid,
  output logic                 lk_resp_hit,
  output loc_t                 lk_resp_loc,
  // update port
  input  logic                 up_valid,
  input  logic [LA_W-1:0]      up_line,
  input  logic [SLOT_W-1:0]    up_slot,
  input  loc_t                 up_loc,
  input  logic                 up_alloc,
  output logic                 up_resp_valid,
  output logic                 up_resp_hit,      // written into a cached line
  output logic                 up_resp_queued,   // will be written after a fetch
  output logic                 up_resp_dropped,  // not applied
  // memory: line read
  output logic                 mem_rd_valid,
  input  logic                 mem_rd_ready,
  output logic [LA_W-1:0]      mem_rd_line,
  input  logic                 mem_rd_resp_valid,
  input  logic [LINE_BITS-1:0] mem_rd_resp_data,
  // memory: line write-back
  output logic                 mem_wr_valid,
  input  logic                 mem_wr_ready,
  output logic [LA_W-1:0]      mem_wr_line,
  output logic [LINE_BITS-1:0] mem_wr_data,
  output logic                 busy              // fetch, write-back or queued updates pending
);

  localparam int unsigned LINES = CACHE_BYTES / LINE_BYTES;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W = LA_W - IDX_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RD_REQ, S_RD_WAIT, S_WB} state_t;

  logic [TAG_W-1:0]     tag_q   [SETS][WAYS];
  logic                 valid_q [SETS][WAYS];
  logic                 dirty_q [SETS][WAYS];
  logic [LINE_BITS-1:0] data_q  [SETS][WAYS];
  logic [WAY_W-1:0]     lru_q   [SETS];        // way to replace next

  state_t               state_q;
  logic [LA_W-1:0]      fetch_line_q;
  logic [LA_W-1:0]      wb_line_q;
  logic [LINE_BITS-1:0] wb_data_q;

  // Update queue, oldest entry at index 0. Invariant: the line of a queued
  // entry is never in the cache, so lookups and write-backs never see a line
  // with updates still owed to it.
  logic                 q_v_q    [UPQ_DEPTH];
  logic [LA_W-1:0]      q_line_q [UPQ_DEPTH];
  logic [SLOT_W-1:0]    q_slot_q [UPQ_DEPTH];
  loc_t                 q_loc_q  [UPQ_DEPTH];

  function automatic logic [IDX_W-1:0] idx_of(logic [LA_W-1:0] a);
    return (SETS > 1) ? IDX_W'(a) : '0;
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [LA_W-1:0] a);
    return TAG_W'(a >> IDX_W);
  endfunction

  // ---------------- tag match for both ports ----------------
  logic             lk_hit, up_hit;
  logic [WAY_W-1:0] lk_way, up_way;
  logic [IDX_W-1:0] lk_idx, up_idx;

  always_comb begin
    lk_idx = idx_of(lk_line);
    up_idx = idx_of(up_line);
    lk_hit = 1'b0; lk_way = '0;
    up_hit = 1'b0; up_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[lk_idx][w] && tag_q[lk_idx][w] == tag_of(lk_line)) begin
        lk_hit = 1'b1; lk_way = WAY_W'(w);
      end
      if (valid_q[up_idx][w] && tag_q[up_idx][w] == tag_of(up_line)) begin
        up_hit = 1'b1; up_way = WAY_W'(w);
      end
    end
  end

  // ---------------- fill: victim choice and queued updates ----------------
  logic [IDX_W-1:0]     fill_idx;
  logic [WAY_W-1:0]     victim;
  logic                 installing, up_inst, fill_dirty;
  logic                 q_take [UPQ_DEPTH];   // entry is written into the arriving line
  logic [LINE_BITS-1:0] fill_line;

  always_comb begin
    fill_idx = idx_of(fetch_line_q);
    victim   = lru_q[fill_idx];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!valid_q[fill_idx][w]) victim = WAY_W'(w);
    installing = (state_q == S_RD_WAIT) && mem_rd_resp_valid;
    // an update to the arriving line in the install cycle goes in with it
    up_inst    = installing && up_valid && (up_line == fetch_line_q);
    fill_line  = mem_rd_resp_data;
    fill_dirty = up_inst;
    for (int i = 0; i < UPQ_DEPTH; i++) begin     // oldest first
      q_take[i] = installing && q_v_q[i] && (q_line_q[i] == fetch_line_q);
      if (q_take[i]) begin
        fill_line[2*q_slot_q[i] +: 2] = q_loc_q[i];
        fill_dirty = 1'b1;
      end
    end
    if (up_inst) fill_line[2*up_slot +: 2] = up_loc;   // newest last
  end

  // ---------------- queue bookkeeping ----------------
  logic                 q_full, q_head_v, up_enq, up_wb;
  int unsigned          q_kept;

  always_comb begin
    q_kept = 0;
    for (int i = 0; i < UPQ_DEPTH; i++) if (q_v_q[i] && !q_take[i]) q_kept++;
    q_full   = q_v_q[UPQ_DEPTH-1];
    q_head_v = q_v_q[0];
    // an update to the line waiting in the write-back buffer goes into it,
    // unless the buffer leaves at this very edge
    up_wb    = up_valid && (state_q == S_WB) && !mem_wr_ready && (up_line == wb_line_q);
    up_enq   = up_valid && !up_hit && up_alloc && !up_inst && !up_wb && (q_kept < UPQ_DEPTH);
  end

  // ---------------- engine start and update write ----------------
  logic engine_free, lk_start, q_start, up_write;

  always_comb begin
    engine_free = (state_q == S_IDLE);
    // lookups first, unless the queue is full
    lk_start    = lk_valid && !lk_hit && engine_free && !q_full;
    q_start     = engine_free && q_head_v && !lk_start;
    // A hit is written unless its way is the one being replaced this cycle.
    up_write    = up_valid && up_hit &&
                  !(installing && up_idx == fill_idx && up_way == victim);
  end

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      for (int i = 0; i < UPQ_DEPTH; i++) q_v_q[i] <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        lru_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          dirty_q[s][w] <= 1'b0;
        end
      end
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (lk_start) begin
            fetch_line_q <= lk_line;
            state_q      <= S_RD_REQ;
          end else if (q_start) begin
            fetch_line_q <= q_line_q[0];
            state_q      <= S_RD_REQ;
          end
        end
        S_RD_REQ: if (mem_rd_ready) state_q <= S_RD_WAIT;
        S_RD_WAIT: begin
          if (installing) begin
            tag_q  [fill_idx][victim] <= tag_of(fetch_line_q);
            valid_q[fill_idx][victim] <= 1'b1;
            dirty_q[fill_idx][victim] <= fill_dirty;
            data_q [fill_idx][victim] <= fill_line;
            lru_q  [fill_idx]         <= WAY_W'((int'(victim) + 1) % WAYS);
            if (valid_q[fill_idx][victim] && dirty_q[fill_idx][victim]) begin
              wb_line_q <= {tag_q[fill_idx][victim], fill_idx};
              wb_data_q <= data_q[fill_idx][victim];
              state_q   <= S_WB;
            end else begin
              state_q   <= S_IDLE;
            end
          end
        end
        S_WB: begin
          if (up_wb) wb_data_q[2*up_slot +: 2] <= up_loc;
          if (mem_wr_ready) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase

      // queue: drop the entries written at install, close the gaps, append
      begin
        int unsigned n;
        n = 0;
        for (int i = 0; i < UPQ_DEPTH; i++) q_v_q[i] <= 1'b0;
        for (int i = 0; i < UPQ_DEPTH; i++) begin
          if (q_v_q[i] && !q_take[i]) begin
            q_v_q[n]    <= 1'b1;
            q_line_q[n] <= q_line_q[i];
            q_slot_q[n] <= q_slot_q[i];
            q_loc_q[n]  <= q_loc_q[i];
            n++;
          end
        end
        if (up_enq) begin
          q_v_q[n]    <= 1'b1;
          q_line_q[n] <= up_line;
          q_slot_q[n] <= up_slot;
          q_loc_q[n]  <= up_loc;
        end
      end

      if (lk_valid && lk_hit && !(installing && lk_idx == fill_idx))
        lru_q[lk_idx] <= WAY_W'((int'(lk_way) + 1) % WAYS);
      if (up_write) begin
        data_q [up_idx][up_way][2*up_slot +: 2] <= up_loc;
        dirty_q[up_idx][up_way]                 <= 1'b1;
      end
    end
  end

  // ---------------- responses ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_resp_valid   <= 1'b0;
      lk_resp_hit     <= 1'b0;
      lk_resp_loc     <= LOC_MEM;
      up_resp_valid   <= 1'b0;
      up_resp_hit     <= 1'b0;
      up_resp_queued  <= 1'b0;
      up_resp_dropped <= 1'b0;
    end else begin
      lk_resp_valid   <= lk_valid;
      lk_resp_hit     <= lk_valid && lk_hit;
      lk_resp_loc     <= loc_t'(data_q[lk_idx][lk_way][2*lk_slot +: 2]);
      up_resp_valid   <= up_valid;
      up_resp_hit     <= up_write || up_inst || up_wb;
      up_resp_queued  <= up_enq;
      up_resp_dropped <= up_valid && !up_write && !up_inst && !up_wb && !up_enq;
    end
  end

  assign mem_rd_valid = (state_q == S_RD_REQ);
  assign mem_rd_line  = fetch_line_q;
  assign mem_wr_valid = (state_q == S_WB);
  assign mem_wr_line  = wb_line_q;
  assign mem_wr_data  = wb_data_q;
  assign busy         = (state_q != S_IDLE) || q_head_v;

  // Entries are kept packed from index 0.
  for (genvar i = 1; i < UPQ_DEPTH; i++) begin : g_qchk
    assert property (@(posedge clk) disable iff (!rst_n) q_v_q[i] |-> q_v_q[i-1]);
  end

endmodule
