// tb_lp_top: end-to-end test of one core's level prediction subsystem at
// its default parameters (2 KiB metadata cache, 32-bit counters, 16 bypass
// MSHRs).
//
// Around the design sits a behavioural model of the rest of the memory
// system: it knows where each of 512 blocks really is (L2, LLC or memory),
// answers L2 lookups, LLC/directory lookups and memory reads after fixed
// latencies (L2 4, LLC tag+directory 8, LLC data 10 more, memory 30 more
// cycles), serves sequential walks itself, and moves blocks around in the
// background the way fills, prefetches and evictions do, reporting fills and
// dirty evictions as events and every served L1 miss as a training report.
// Clean evictions and dropped prefetch reports make the LocMap stale, so all
// misprediction cases occur. The LocMap table lives in tb_locmap_mem.
//
// Checked: the prediction and routing come one cycle after the L1 miss; every
// directory decision and outcome class matches the block's real location;
// every request sent past L2 is answered exactly once, by an L1 fill from the
// expected level or, after a recovery to L2, by L2 directly with no fill;
// duplicate answers of parallel lookups are dropped; nothing is left in the
// MSHRs at the end. Each mechanism (LocMap and detector predictions,
// multi-way prediction, bypass, parallel lookup, the five directory actions,
// dropped duplicates, MSHR-full fallback, LocMap fetch and write-back,
// applied and dropped updates) must happen at least once.
module tb_lp_top;
  import lp_pkg::*;

  localparam int LA_W = PA_W - OFFSET_W;
  localparam logic [LA_W-1:0] BASE = 28'h3C0_0000;
  localparam int NBLK = 512;
  localparam int L2_LAT = 4, DIR_LAT = 8, L3_DATA = 10, MEM_LAT = 30;

  logic clk = 0, rst_n = 0;
  // design ports
  logic l1m_valid = 0; logic [PA_W-1:0] l1m_pa = 0;
  logic pred_valid, pred_from_map, pred_fallback; lvl_mask_t pred_mask; logic [1:0] pred_ways;
  logic l2_req_valid, llc_req_valid; logic [PA_W-1:0] l2_req_pa, llc_req_pa; lvl_mask_t llc_req_mask;
  logic dir_valid = 0; logic [PA_W-1:0] dir_pa = 0; lvl_mask_t dir_mask = '0; loc_t dir_actual = LOC_MEM;
  logic act_valid, release_l3_mshr, mispredict; logic [PA_W-1:0] act_pa; dir_action_t act; outcome_t outcome;
  logic resp_valid = 0; logic [PA_W-1:0] resp_pa = 0; loc_t resp_src = LOC_L3;
  logic l1_fill_valid, resp_dropped; logic [LA_W-1:0] l1_fill_line; loc_t l1_fill_src;
  logic [3:0] l1_fill_targets; logic [4:0] mshr_occupancy;
  logic hit_valid = 0; loc_t hit_level = LOC_L2;
  logic ev_valid = 0; ev_kind_t ev_kind = EV_DEMAND_FILL; cache_lvl_t ev_level = CL_L2;
  logic [PA_W-1:0] ev_pa = 0; logic ev_applied;
  logic mem_rd_valid, mem_rd_ready, mem_rd_resp_valid, mem_wr_valid, mem_wr_ready;
  logic [LA_W-1:0] mem_rd_line, mem_wr_line; logic [LINE_BITS-1:0] mem_rd_resp_data, mem_wr_data;
  int n_reads, n_writes;

  lp_top dut (.*, .base_line (BASE));

  tb_locmap_mem #(.LA_W(LA_W), .LAT(MEM_LAT), .PATTERN(1'b0)) mem (
    .clk, .rd_valid (mem_rd_valid), .rd_ready (mem_rd_ready), .rd_line (mem_rd_line),
    .rd_resp_valid (mem_rd_resp_valid), .rd_resp_data (mem_rd_resp_data),
    .wr_valid (mem_wr_valid), .wr_ready (mem_wr_ready), .wr_line (mem_wr_line),
    .wr_data (mem_wr_data), .n_reads, .n_writes);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL t=%0t %s", $time, s);
  endtask

  // ---------------- memory-system model ----------------
  loc_t truth  [NBLK];
  bit   l3copy [NBLK];
  bit   busy   [NBLK];      // an L1 miss to this block is outstanding
  bit   bypass [NBLK];      // ... and it was sent past L2
  bit   reissued [NBLK];    // ... and was recovered to L2
  loc_t exp_src [NBLK];     // level expected to fill L1

  function automatic logic [PA_W-1:0] pa_of(int b);
    return PA_W'(34'h1_0000_0000 + longint'(b / 8) * 16384 + longint'(b % 8) * 64);
  endfunction
  function automatic int blk_of_line(logic [LA_W-1:0] line);
    longint off;
    off = longint'(line) * 64 - 64'h1_0000_0000;
    return int'((off / 16384) * 8 + (off % 16384) / 64);
  endfunction
  function automatic int blk_of(logic [PA_W-1:0] pa);
    return blk_of_line(pa[PA_W-1:OFFSET_W]);
  endfunction

  typedef enum int {J_DIR, J_RESP, J_DONE} jkind_t;
  typedef struct { int due; jkind_t kind; int blk; lvl_mask_t mask; loc_t src; } job_t;
  job_t jobs [$];

  typedef struct { ev_kind_t k; cache_lvl_t l; int blk; } evq_t;
  evq_t evq [$];
  loc_t hitq [$];
  lvl_mask_t dir_mask_of [NBLK];
  loc_t      dir_truth_of [NBLK];

  // mechanism counters
  int c_map, c_pld, c_multi, c_seq, c_byp, c_par, c_fallback, c_drop;
  int c_act [5];
  int c_applied, c_notapplied, c_fills, c_served, c_lost;

  int cyc = 0;
  bit gen = 1;
  int directed_blk = -1;
  logic prev_l1m = 0;
  logic [PA_W-1:0] prev_pa;

  task automatic schedule(int d, jkind_t k, int b, lvl_mask_t m, loc_t s);
    job_t j;
    j.due = cyc + d; j.kind = k; j.blk = b; j.mask = m; j.src = s;
    jobs.push_back(j);
  endtask

  // a block arrives in L2 on a demand fill
  task automatic demand_fill_l2(int b, loc_t from);
    // the non-inclusive LLC keeps a copy of blocks it served, and of about
    // half of the blocks that came from memory
    if (from == LOC_L3 || (from == LOC_MEM && $urandom % 2 == 0)) l3copy[b] = 1;
    truth[b] = LOC_L2;
    evq.push_back('{EV_DEMAND_FILL, CL_L2, b});
  endtask

  task automatic serve_done(int b, loc_t lvl);
    hitq.push_back(lvl);
    if (lvl != LOC_L2) demand_fill_l2(b, lvl);
    busy[b] = 0; bypass[b] = 0; reissued[b] = 0;
    c_served++;
  endtask

  int nearest_rank, truth_rank;

  always @(negedge clk) begin
    if (rst_n) begin
      cyc++;
      // ---- 1. observe the design ----
      checks++;
      if (pred_valid != prev_l1m) fail("prediction not one cycle after the L1 miss");
      if (pred_valid) begin
        int b;
        b = blk_of(l2_req_valid ? l2_req_pa : llc_req_pa);
        if ((l2_req_valid || llc_req_valid) && b != blk_of(prev_pa)) fail("request address");
        if (!l2_req_valid && !llc_req_valid) fail("prediction issued no request");
        if (pred_from_map) c_map++; else c_pld++;
        if (pred_ways > 1) c_multi++;
        if (pred_fallback) c_fallback++;
        if (llc_req_valid) begin
          c_byp++;
          bypass[b] = 1;
          schedule(DIR_LAT, J_DIR, b, llc_req_mask, LOC_MEM);
          if (l2_req_valid) begin
            c_par++;
            if (truth[b] == LOC_L2) schedule(L2_LAT, J_RESP, b, llc_req_mask, LOC_L2);
          end
        end else begin
          // ordinary sequential walk, served by the hierarchy itself
          c_seq++;
          schedule(truth[b] == LOC_L2 ? L2_LAT : truth[b] == LOC_L3 ? DIR_LAT + L3_DATA
                                                                   : DIR_LAT + MEM_LAT,
                   J_DONE, b, '0, truth[b]);
        end
      end
      if (act_valid) begin
        int b;
        dir_action_t ea;
        lvl_mask_t m;
        loc_t t;
        b = blk_of(act_pa);
        m = dir_mask_of[b]; t = dir_truth_of[b];
        case (t)
          LOC_L2:  ea = m.l2 ? ACT_NONE : ACT_REISSUE_L2;
          LOC_L3:  ea = (m.l2 || m.l3) ? ACT_RESPOND_L3 : ACT_REISSUE_L3;
          default: ea = ACT_FWD_MEM;
        endcase
        nearest_rank = m.l2 ? 0 : m.l3 ? 1 : 2;
        truth_rank   = (t == LOC_L2) ? 0 : (t == LOC_L3) ? 1 : 2;
        checks++;
        if (act != ea) fail($sformatf("action %0d expected %0d", act, ea));
        checks++;
        if ((nearest_rank > truth_rank) != (outcome == OUT_HARMFUL) ||
            (nearest_rank < truth_rank) != (outcome == OUT_OPP_LOSS) ||
            mispredict != (act == ACT_REISSUE_L2 || act == ACT_REISSUE_L3))
          fail("outcome class");
        if (int'(act) < 5) c_act[int'(act)]++;
        case (act)
          ACT_RESPOND_L3, ACT_REISSUE_L3: begin
            exp_src[b] = LOC_L3; schedule(L3_DATA, J_RESP, b, m, LOC_L3);
          end
          ACT_FWD_MEM: begin
            exp_src[b] = LOC_MEM; schedule(MEM_LAT, J_RESP, b, m, LOC_MEM);
          end
          ACT_REISSUE_L2: begin
            reissued[b] = 1; schedule(L2_LAT, J_DONE, b, m, LOC_L2);
          end
          default: begin   // parallel L2 lookup serves; an LLC copy answers too
            if (l3copy[b]) schedule(L3_DATA, J_RESP, b, m, LOC_L3);
          end
        endcase
      end
      if (l1_fill_valid) begin
        int b;
        b = blk_of_line(l1_fill_line);
        checks++;
        if (!busy[b] || !bypass[b] || reissued[b]) fail("unexpected L1 fill");
        else if (l1_fill_src != exp_src[b] || l1_fill_targets != 1) fail("fill source");
        c_fills++;
        serve_done(b, l1_fill_src);
      end
      if (resp_dropped) c_drop++;
      if (ev_valid) begin
        if (ev_applied) c_applied++; else c_notapplied++;
        if (!ev_applied && ev_kind != EV_PREFETCH_FILL) c_lost++;
      end
    end

    // ---- 2. drive this cycle ----
    dir_valid = 0; resp_valid = 0; ev_valid = 0; hit_valid = 0; l1m_valid = 0;
    if (rst_n) begin
      bit dir_used, resp_used;
      dir_used = 0; resp_used = 0;
      for (int i = 0; i < jobs.size(); i++) begin
        if (jobs[i].due > cyc) continue;
        if (jobs[i].kind == J_DIR) begin
          if (dir_used) continue;
          dir_used = 1;
          dir_valid = 1; dir_pa = pa_of(jobs[i].blk); dir_mask = jobs[i].mask;
          dir_actual = truth[jobs[i].blk];
          dir_mask_of[jobs[i].blk] = jobs[i].mask;
          dir_truth_of[jobs[i].blk] = truth[jobs[i].blk];
          if (truth[jobs[i].blk] == LOC_L2) exp_src[jobs[i].blk] = LOC_L2;
        end else if (jobs[i].kind == J_RESP) begin
          if (resp_used) continue;
          resp_used = 1;
          resp_valid = 1; resp_pa = pa_of(jobs[i].blk); resp_src = jobs[i].src;
          if (jobs[i].src == LOC_L2) exp_src[jobs[i].blk] = LOC_L2;
        end else begin
          serve_done(jobs[i].blk, jobs[i].src);
        end
        jobs.delete(i);
        i--;
      end
      if (evq.size() > 0) begin
        evq_t e;
        e = evq.pop_front();
        ev_valid = 1; ev_kind = e.k; ev_level = e.l; ev_pa = pa_of(e.blk);
      end
      if (hitq.size() > 0) begin
        hit_valid = 1; hit_level = hitq.pop_front();
      end
      // background movement of blocks that are not in flight
      if ($urandom % 4 == 0) begin
        int b, r;
        b = int'($urandom % NBLK);
        r = int'($urandom % 8);
        if (!busy[b]) begin
          if (truth[b] == LOC_L2 && r < 3) begin             // L2 eviction
            truth[b] = LOC_L3;
            if (r == 0) evq.push_back('{EV_DIRTY_EVICT, CL_L2, b});
          end else if (truth[b] == LOC_L3 && r < 3) begin    // LLC eviction
            truth[b] = LOC_MEM; l3copy[b] = 0;
            if (r == 0) evq.push_back('{EV_DIRTY_EVICT, CL_L3, b});
          end else if (truth[b] == LOC_MEM && r >= 6) begin  // LLC prefetch
            truth[b] = LOC_L3;
            evq.push_back('{EV_PREFETCH_FILL, CL_L3, b});
          end else if (truth[b] == LOC_L3 && r == 7) begin   // L2 prefetch
            truth[b] = LOC_L2; l3copy[b] = 1;
            evq.push_back('{EV_PREFETCH_FILL, CL_L2, b});
          end
        end
      end
      // new L1 miss
      if (directed_blk >= 0) begin
        busy[directed_blk] = 1; bypass[directed_blk] = 0; reissued[directed_blk] = 0;
        l1m_valid = 1; l1m_pa = pa_of(directed_blk);
        directed_blk = -1;
      end else if (gen && $urandom % 2 == 0) begin
        int b;
        // phases: hot and cold blocks in turn; a few hot blocks; the whole range
        case ((cyc / 2000) % 3)
          0:       b = (cyc % 4 < 2) ? int'($urandom % 24) : 256 + int'($urandom % 256);
          1:       b = int'($urandom % 96);
          default: b = int'($urandom % NBLK);
        endcase
        if (!busy[b]) begin
          busy[b] = 1; bypass[b] = 0; reissued[b] = 0;
          l1m_valid = 1; l1m_pa = pa_of(b) + PA_W'($urandom % 64);
        end
      end
    end
    prev_l1m = l1m_valid; prev_pa = l1m_pa;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int outstanding;
    for (int b = 0; b < NBLK; b++) begin
      truth[b] = LOC_MEM; l3copy[b] = 0; busy[b] = 0; bypass[b] = 0; reissued[b] = 0;
      exp_src[b] = LOC_MEM;
    end
    c_map = 0; c_pld = 0; c_multi = 0; c_seq = 0; c_byp = 0; c_par = 0;
    c_fallback = 0; c_drop = 0; c_act = '{0, 0, 0, 0, 0};
    c_applied = 0; c_notapplied = 0; c_lost = 0; c_fills = 0; c_served = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    repeat (100000) @(posedge clk);
    gen = 0;
    repeat (400) @(posedge clk);
    // Directed end: after a reset the detector counters are zero and the
    // metadata cache is empty, so the next predictions are multi-way. Blocks
    // held in L2 with a copy in the LLC are then looked up in L2 and past it
    // in parallel: L2 fills L1 and the LLC's late answer must be dropped.
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) begin
      truth[100 + 8 * k] = LOC_L2; l3copy[100 + 8 * k] = 1;
      @(negedge clk); directed_blk = 100 + 8 * k;
      repeat (60) @(negedge clk);
    end
    outstanding = 0;
    for (int b = 0; b < NBLK; b++) outstanding += busy[b];
    checks++;
    if (outstanding != 0 || mshr_occupancy != 0)
      fail($sformatf("%0d requests never served, %0d MSHRs held", outstanding, mshr_occupancy));
    $display("predictions: locmap=%0d detector=%0d multi-way=%0d", c_map, c_pld, c_multi);
    $display("routing: sequential=%0d bypass=%0d parallel-L2=%0d mshr-full fallback=%0d",
             c_seq, c_byp, c_par, c_fallback);
    $display("directory: respond-LLC=%0d fwd-mem=%0d reissue-L2=%0d reissue-LLC=%0d none=%0d",
             c_act[0], c_act[1], c_act[2], c_act[3], c_act[4]);
    $display("return: fills=%0d dropped duplicates=%0d served=%0d", c_fills, c_drop, c_served);
    $display("locmap: reads=%0d write-backs=%0d events applied=%0d dropped=%0d (demand/dirty %0d)",
             n_reads, n_writes, c_applied, c_notapplied, c_lost);
    begin
      int need [16];
      need = '{c_map, c_pld, c_multi, c_seq, c_byp, c_par, c_fallback, c_drop,
               c_act[0], c_act[1], c_act[2], c_act[3], c_act[4], n_reads, n_writes, c_notapplied};
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (need[i] == 0) fail($sformatf("mechanism %0d never happened", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
