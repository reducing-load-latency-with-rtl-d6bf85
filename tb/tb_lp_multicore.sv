// tb_lp_multicore: four cores, one level predictor (lp_top) each, sharing
// one LocMap table in memory and one last-level cache.
//
// Every core has its own lp_top at default parameters and its own model of a
// 256 KiB 8-way L2. The cores share a model of an 8 MiB 16-way non-inclusive
// LLC (the multi-core LLC size of the evaluated system) and one LocMap
// store, which each core's metadata cache reads and writes back through its
// own memory port. Each core runs one kernel on private data, one miss in
// flight per core, all four at once:
//   cores 0 and 1  stream-copy over 2 MiB arrays, two passes; their arrays
//                  interleave 4 KiB page by page, so both metadata caches
//                  hold the same LocMap lines and overwrite each other's
//                  write-backs (the table keeps one entry per block and the
//                  metadata caches are not kept coherent);
//   cores 2 and 3  gups over private 2 GiB tables, 10 000 updates each.
// Fills, dirty L2 and LLC victims are reported to the core that caused them;
// clean evictions are silent. An LLC victim of one core's fill may belong to
// another core; its report goes to the core that owns the block.
//
// Checked, for every miss of every core: the prediction one cycle after the
// miss, the directory action and outcome class against the model's location,
// exactly one L1 fill from the right level (or an L2 answer after a
// recovery), and no MSHR entry left over. The accuracy classes are printed
// per core. Kernel choice, mix, page interleaving and latencies are this
// testbench's; the per-core predictor and the shared LocMap follow the
// described multi-core setup.
module tb_lp_multicore;
  import lp_pkg::*;

  localparam int NC = 4;
  localparam int LA_W = PA_W - OFFSET_W;
  localparam logic [LA_W-1:0] BASE = 28'h3C0_0000;
  localparam int L2_SETS = 512, L2_WAYS = 8;            // 256 KiB per core
  localparam int L3_SETS = 8192, L3_WAYS = 16;          // 8 MiB shared
  localparam int MEM_LAT = 30;

  logic clk = 0, rst_n = 0;
  logic            l1m_valid [NC];
  logic [PA_W-1:0] l1m_pa    [NC];
  logic            pred_valid [NC], pred_from_map [NC], pred_fallback [NC];
  lvl_mask_t       pred_mask [NC];
  logic [1:0]      pred_ways [NC];
  logic            l2_req_valid [NC], llc_req_valid [NC];
  logic [PA_W-1:0] l2_req_pa [NC], llc_req_pa [NC];
  lvl_mask_t       llc_req_mask [NC];
  logic            dir_valid [NC];
  logic [PA_W-1:0] dir_pa [NC];
  lvl_mask_t       dir_mask [NC];
  loc_t            dir_actual [NC];
  logic            act_valid [NC], release_l3_mshr [NC], mispredict [NC];
  logic [PA_W-1:0] act_pa [NC];
  dir_action_t     act [NC];
  outcome_t        outcome [NC];
  logic            resp_valid [NC];
  logic [PA_W-1:0] resp_pa [NC];
  loc_t            resp_src [NC];
  logic            l1_fill_valid [NC], resp_dropped [NC];
  logic [LA_W-1:0] l1_fill_line [NC];
  loc_t            l1_fill_src [NC];
  logic [3:0]      l1_fill_targets [NC];
  logic [4:0]      mshr_occupancy [NC];
  logic            hit_valid [NC];
  loc_t            hit_level [NC];
  logic            ev_valid [NC];
  ev_kind_t        ev_kind [NC];
  cache_lvl_t      ev_level [NC];
  logic [PA_W-1:0] ev_pa [NC];
  logic            ev_applied [NC];
  logic            mem_rd_valid [NC], mem_rd_ready [NC], mem_rd_resp_valid [NC];
  logic            mem_wr_valid [NC], mem_wr_ready [NC];
  logic [LA_W-1:0] mem_rd_line [NC], mem_wr_line [NC];
  logic [LINE_BITS-1:0] mem_rd_resp_data [NC], mem_wr_data [NC];

  for (genvar g = 0; g < NC; g++) begin : g_core
    lp_top u_lp (
      .clk, .rst_n, .base_line (BASE),
      .l1m_valid (l1m_valid[g]), .l1m_pa (l1m_pa[g]),
      .pred_valid (pred_valid[g]), .pred_mask (pred_mask[g]), .pred_ways (pred_ways[g]),
      .pred_from_map (pred_from_map[g]), .pred_fallback (pred_fallback[g]),
      .l2_req_valid (l2_req_valid[g]), .l2_req_pa (l2_req_pa[g]),
      .llc_req_valid (llc_req_valid[g]), .llc_req_pa (llc_req_pa[g]), .llc_req_mask (llc_req_mask[g]),
      .dir_valid (dir_valid[g]), .dir_pa (dir_pa[g]), .dir_mask (dir_mask[g]), .dir_actual (dir_actual[g]),
      .act_valid (act_valid[g]), .act_pa (act_pa[g]), .act (act[g]),
      .release_l3_mshr (release_l3_mshr[g]), .mispredict (mispredict[g]), .outcome (outcome[g]),
      .resp_valid (resp_valid[g]), .resp_pa (resp_pa[g]), .resp_src (resp_src[g]),
      .l1_fill_valid (l1_fill_valid[g]), .l1_fill_line (l1_fill_line[g]), .l1_fill_src (l1_fill_src[g]),
      .l1_fill_targets (l1_fill_targets[g]), .resp_dropped (resp_dropped[g]),
      .mshr_occupancy (mshr_occupancy[g]),
      .hit_valid (hit_valid[g]), .hit_level (hit_level[g]),
      .ev_valid (ev_valid[g]), .ev_kind (ev_kind[g]), .ev_level (ev_level[g]), .ev_pa (ev_pa[g]),
      .ev_applied (ev_applied[g]),
      .mem_rd_valid (mem_rd_valid[g]), .mem_rd_ready (mem_rd_ready[g]), .mem_rd_line (mem_rd_line[g]),
      .mem_rd_resp_valid (mem_rd_resp_valid[g]), .mem_rd_resp_data (mem_rd_resp_data[g]),
      .mem_wr_valid (mem_wr_valid[g]), .mem_wr_ready (mem_wr_ready[g]), .mem_wr_line (mem_wr_line[g]),
      .mem_wr_data (mem_wr_data[g])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL t=%0t %s", $time, s);
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- shared LocMap store, one read/write port per core ----------------
  logic [LINE_BITS-1:0] lm [logic [LA_W-1:0]];
  int                   rd_timer [NC];
  logic [LA_W-1:0]      rd_line_q [NC];
  int n_reads = 0, n_writes = 0;

  always_comb for (int c = 0; c < NC; c++) begin
    mem_rd_ready[c] = (rd_timer[c] < 0);
    mem_wr_ready[c] = 1'b1;
    mem_rd_resp_valid[c] = (rd_timer[c] == 0);
    mem_rd_resp_data[c]  = lm.exists(rd_line_q[c]) ? lm[rd_line_q[c]] : '0;
  end

  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      if (!rst_n) rd_timer[c] <= -1;
      else if (mem_rd_valid[c] && rd_timer[c] < 0) begin
        rd_timer[c] <= MEM_LAT; rd_line_q[c] <= mem_rd_line[c]; n_reads++;
      end else if (rd_timer[c] >= 0) rd_timer[c] <= rd_timer[c] - 1;
      if (rst_n && mem_wr_valid[c]) begin lm[mem_wr_line[c]] = mem_wr_data[c]; n_writes++; end
    end
  end

  // ---------------- cache models ----------------
  longint l2_blk [NC][L2_SETS][L2_WAYS];
  bit     l2_v   [NC][L2_SETS][L2_WAYS];
  bit     l2_d   [NC][L2_SETS][L2_WAYS];
  int     l2_t   [NC][L2_SETS][L2_WAYS];
  longint l3_blk [L3_SETS][L3_WAYS];
  bit     l3_v   [L3_SETS][L3_WAYS];
  bit     l3_d   [L3_SETS][L3_WAYS];
  int     l3_t   [L3_SETS][L3_WAYS];
  int     stamp = 0;

  typedef struct { ev_kind_t k; cache_lvl_t l; longint blk; } ev_t;
  ev_t evq [NC][$];

  // owner of a block: every core works in its own address range
  function automatic int owner(longint b);
    longint a = b * 64;
    if (a < 64'h8000_0000) return int'((a / 4096) % 2);   // interleaved stream pages
    return int'((a - 64'h8000_0000) / 64'h8000_0000) + 2; // gups tables from 2 GiB
  endfunction

  function automatic int l2_find(int c, longint b);
    int s = int'(b % longint'(L2_SETS));
    for (int w = 0; w < L2_WAYS; w++) if (l2_v[c][s][w] && l2_blk[c][s][w] == b) return w;
    return -1;
  endfunction
  function automatic int l3_find(longint b);
    int s = int'(b % longint'(L3_SETS));
    for (int w = 0; w < L3_WAYS; w++) if (l3_v[s][w] && l3_blk[s][w] == b) return w;
    return -1;
  endfunction
  function automatic loc_t where(int c, longint b);
    if (l2_find(c, b) >= 0) return LOC_L2;
    if (l3_find(b) >= 0) return LOC_L3;
    return LOC_MEM;
  endfunction

  task automatic l3_insert(longint b, bit dirty);
    int s = int'(b % longint'(L3_SETS));
    int w = l3_find(b);
    if (w < 0) begin
      w = 0;
      for (int i = 0; i < L3_WAYS; i++) begin
        if (!l3_v[s][i]) begin w = i; break; end
        if (l3_t[s][i] < l3_t[s][w]) w = i;
      end
      if (l3_v[s][w] && l3_d[s][w])
        evq[owner(l3_blk[s][w])].push_back('{EV_DIRTY_EVICT, CL_L3, l3_blk[s][w]});
      l3_v[s][w] = 1; l3_blk[s][w] = b; l3_d[s][w] = 0;
    end
    l3_d[s][w] = l3_d[s][w] | dirty;
    l3_t[s][w] = ++stamp;
  endtask

  task automatic serve(int c, longint b, loc_t lvl, bit wr);
    int s = int'(b % longint'(L2_SETS));
    int w = l2_find(c, b);
    if (lvl == LOC_MEM) begin
      l3_insert(b, 0);
      evq[c].push_back('{EV_DEMAND_FILL, CL_L3, b});
    end else if (lvl == LOC_L3 && l3_find(b) >= 0) begin
      l3_t[int'(b % longint'(L3_SETS))][l3_find(b)] = ++stamp;
    end
    if (w < 0) begin
      w = 0;
      for (int i = 0; i < L2_WAYS; i++) begin
        if (!l2_v[c][s][i]) begin w = i; break; end
        if (l2_t[c][s][i] < l2_t[c][s][w]) w = i;
      end
      if (l2_v[c][s][w] && l2_d[c][s][w]) begin
        evq[c].push_back('{EV_DIRTY_EVICT, CL_L2, l2_blk[c][s][w]});
        l3_insert(l2_blk[c][s][w], 1);
      end
      l2_v[c][s][w] = 1; l2_blk[c][s][w] = b; l2_d[c][s][w] = 0;
      evq[c].push_back('{EV_DEMAND_FILL, CL_L2, b});
    end
    l2_d[c][s][w] = l2_d[c][s][w] | wr;
    l2_t[c][s][w] = ++stamp;
  endtask

  // ---------------- one L1 miss of core c ----------------
  int k_seq [NC], k_skip [NC], k_opp [NC], k_harm [NC], k_map [NC], k_pld [NC];

  function automatic int rank(loc_t l);
    return (l == LOC_L2) ? 0 : (l == LOC_L3) ? 1 : 2;
  endfunction

  task automatic l1_miss(int c, longint b, bit wr);
    loc_t truth;
    lvl_mask_t m;
    int near;
    dir_action_t exp_act;
    outcome_t    exp_out;
    truth = where(c, b);

    @(negedge clk); l1m_valid[c] = 1; l1m_pa[c] = PA_W'(b * 64);
    @(negedge clk); l1m_valid[c] = 0;
    checks++;
    if (!pred_valid[c]) begin fail($sformatf("core %0d: no prediction", c)); return; end
    m = pred_mask[c];
    if (pred_from_map[c]) k_map[c]++; else k_pld[c]++;
    near = m.l2 ? 0 : m.l3 ? 1 : 2;
    if (near > rank(truth))      begin k_harm[c]++; exp_out = OUT_HARMFUL; end
    else if (near < rank(truth)) begin k_opp[c]++;  exp_out = OUT_OPP_LOSS; end
    else if (truth == LOC_L2)    begin k_seq[c]++;  exp_out = OUT_SEQUENTIAL; end
    else                         begin k_skip[c]++; exp_out = OUT_SKIP; end

    if (llc_req_valid[c]) begin
      repeat (2) @(negedge clk);
      truth = where(c, b);     // other cores may have moved LLC contents meanwhile
      near = m.l2 ? 0 : m.l3 ? 1 : 2;
      if (near > rank(truth))      exp_out = OUT_HARMFUL;
      else if (near < rank(truth)) exp_out = OUT_OPP_LOSS;
      else if (truth == LOC_L2)    exp_out = OUT_SEQUENTIAL;
      else                         exp_out = OUT_SKIP;
      dir_valid[c] = 1; dir_pa[c] = PA_W'(b * 64); dir_mask[c] = m; dir_actual[c] = truth;
      @(negedge clk); dir_valid[c] = 0;
      if (truth == LOC_L2)      exp_act = m.l2 ? ACT_NONE : ACT_REISSUE_L2;
      else if (truth == LOC_L3) exp_act = (m.l2 || m.l3) ? ACT_RESPOND_L3 : ACT_REISSUE_L3;
      else                      exp_act = ACT_FWD_MEM;
      checks++;
      if (!act_valid[c] || act[c] != exp_act || outcome[c] != exp_out)
        fail($sformatf("core %0d blk %0h: action %s/%s expected %s/%s", c, b, act[c].name(),
                       outcome[c].name(), exp_act.name(), exp_out.name()));
      if (exp_act != ACT_REISSUE_L2) begin
        repeat ((exp_act == ACT_FWD_MEM) ? 8 : 3) @(negedge clk);
        resp_valid[c] = 1; resp_pa[c] = PA_W'(b * 64); resp_src[c] = truth;
        @(negedge clk); resp_valid[c] = 0;
        checks++;
        if (!l1_fill_valid[c] || l1_fill_src[c] != truth || l1_fill_line[c] != LA_W'(b))
          fail($sformatf("core %0d blk %0h: no L1 fill", c, b));
      end else begin
        @(negedge clk);
      end
      checks++;
      if (mshr_occupancy[c] != 0) fail($sformatf("core %0d: MSHR entry left behind", c));
    end

    serve(c, b, truth, wr);
    hit_valid[c] = 1; hit_level[c] = truth;
    while (evq[c].size() > 0) begin
      ev_t e = evq[c].pop_front();
      ev_valid[c] = 1; ev_kind[c] = e.k; ev_level[c] = e.l; ev_pa[c] = PA_W'(e.blk * 64);
      @(negedge clk); hit_valid[c] = 0; ev_valid[c] = 0;
    end
    @(negedge clk); hit_valid[c] = 0;
  endtask

  localparam longint S_BLK = (2 * 1024 * 1024) / 64;   // 2 MiB arrays

  // block i of stream array arr (0: a, 1: c) of core c, pages interleaved
  function automatic longint stream_blk(int c, int arr, longint i);
    longint page = i / 64, off = i % 64;
    return (64'h1000_0000 * longint'(arr + 1) + (2 * page + c) * 4096) / 64 + off;
  endfunction

  task automatic run_core(int c);
    if (c < 2) begin
      for (int pass = 0; pass < 2; pass++)
        for (longint i = 0; i < S_BLK; i++) begin
          l1_miss(c, stream_blk(c, 0, i), 0);
          l1_miss(c, stream_blk(c, 1, i), 1);
        end
    end else begin
      for (int i = 0; i < 10000; i++) begin
        longint r;
        r = {$urandom, $urandom};
        l1_miss(c, (64'h8000_0000 * longint'(c - 1) +
                    ((r & 64'h7fff_ffff_ffff_ffff) % 64'h8000_0000)) / 64, 1);
      end
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      l1m_valid[c] = 0; l1m_pa[c] = '0; dir_valid[c] = 0; dir_pa[c] = '0; dir_mask[c] = '0;
      dir_actual[c] = LOC_MEM; resp_valid[c] = 0; resp_pa[c] = '0; resp_src[c] = LOC_L3;
      hit_valid[c] = 0; hit_level[c] = LOC_L2; ev_valid[c] = 0; ev_kind[c] = EV_DEMAND_FILL;
      ev_level[c] = CL_L2; ev_pa[c] = '0;
      k_seq[c] = 0; k_skip[c] = 0; k_opp[c] = 0; k_harm[c] = 0; k_map[c] = 0; k_pld[c] = 0;
      for (int s = 0; s < L2_SETS; s++) for (int w = 0; w < L2_WAYS; w++) l2_v[c][s][w] = 0;
    end
    for (int s = 0; s < L3_SETS; s++) for (int w = 0; w < L3_WAYS; w++) l3_v[s][w] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;

    fork
      run_core(0);
      run_core(1);
      run_core(2);
      run_core(3);
    join

    for (int c = 0; c < NC; c++) begin
      int tot;
      tot = k_seq[c] + k_skip[c] + k_opp[c] + k_harm[c];
      $display("core %0d (%s): misses=%0d sequential=%0d skip=%0d opportunity-loss=%0d harmful=%0d locmap=%0d detector=%0d",
               c, (c < 2) ? "stream-copy" : "gups", tot, k_seq[c], k_skip[c], k_opp[c], k_harm[c],
               k_map[c], k_pld[c]);
      checks++;
      if (tot == 0) fail($sformatf("core %0d made no misses", c));
    end
    checks++;
    if (k_map[0] == 0 || k_map[1] == 0) fail("stream cores never used the LocMap");
    $display("locmap traffic: line reads=%0d write-backs=%0d", n_reads, n_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
