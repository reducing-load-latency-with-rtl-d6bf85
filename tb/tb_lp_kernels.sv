// tb_lp_kernels: runs the level predictor, at its default parameters, under
// the address streams of two memory kernels, and reports how its predictions
// fall into the four accuracy classes.
//
//   stream-copy  c[i] = a[i] over two 4 MiB arrays, two passes; each 64-byte
//                block of a is read and each block of c is written once per
//                pass
//   gups         random read-modify-write of 64-bit words in an 8 GiB table
//                (the table size used in the evaluation); 40 000 updates
//                here instead of 4 million
//
// Around lp_top sits a behavioural model of the private L2 (256 KiB, 8-way)
// and the shared, non-inclusive LLC (2 MiB, 16-way), both LRU, with the sizes
// of the evaluated single-core system. Each kernel access is taken to be an
// L1 miss. The model knows where each block really is. Fills from memory go
// into L2 and the LLC, dirty L2 victims into the LLC, and dirty LLC victims to
// memory; all of these are reported to the predictor. Clean evictions are
// silent, so the LocMap goes stale as it would in a real system. There is no
// prefetcher. One miss is in flight at a time.
//
// For every miss the testbench checks:
//   * the prediction strobe one cycle after the miss;
//   * the directory action and outcome class against the model's location;
//   * that a request sent past L2 is answered by exactly one L1 fill from the
//     right level, or by L2 after a recovery, and leaves no MSHR entry behind.
// It prints the counts of sequential, skip, opportunity-loss and harmful
// predictions per kernel. It fails if stream-copy never uses the LocMap or
// gups never uses the detector. Sizes and the kernels' access patterns come
// from the evaluation; the cache models' details, the latencies, the number
// of gups updates and the array size of stream-copy are this testbench's.
module tb_lp_kernels;
  import lp_pkg::*;

  localparam int LA_W = PA_W - OFFSET_W;
  localparam logic [LA_W-1:0] BASE = 28'h3C0_0000;     // LocMap in the top 1 GiB
  localparam int L2_SETS = 512, L2_WAYS = 8;            // 256 KiB
  localparam int L3_SETS = 2048, L3_WAYS = 16;          // 2 MiB
  localparam int MEM_LAT = 30;

  logic clk = 0, rst_n = 0;
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

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- cache model (block numbers, LRU by time stamp) ----------------
  longint l2_blk [L2_SETS][L2_WAYS];
  bit     l2_v   [L2_SETS][L2_WAYS];
  bit     l2_d   [L2_SETS][L2_WAYS];
  int     l2_t   [L2_SETS][L2_WAYS];
  longint l3_blk [L3_SETS][L3_WAYS];
  bit     l3_v   [L3_SETS][L3_WAYS];
  bit     l3_d   [L3_SETS][L3_WAYS];
  int     l3_t   [L3_SETS][L3_WAYS];
  int     stamp = 0;

  typedef struct { ev_kind_t k; cache_lvl_t l; longint blk; } ev_t;
  ev_t evq [$];

  function automatic int l2_find(longint b);
    int s = int'(b % L2_SETS);
    for (int w = 0; w < L2_WAYS; w++) if (l2_v[s][w] && l2_blk[s][w] == b) return w;
    return -1;
  endfunction
  function automatic int l3_find(longint b);
    int s = int'(b % L3_SETS);
    for (int w = 0; w < L3_WAYS; w++) if (l3_v[s][w] && l3_blk[s][w] == b) return w;
    return -1;
  endfunction
  function automatic loc_t where(longint b);
    if (l2_find(b) >= 0) return LOC_L2;
    if (l3_find(b) >= 0) return LOC_L3;
    return LOC_MEM;
  endfunction

  // put a block into the LLC (a fill from memory, or a dirty L2 victim)
  task automatic l3_insert(longint b, bit dirty);
    int s = int'(b % L3_SETS);
    int w = l3_find(b);
    if (w < 0) begin
      w = 0;
      for (int i = 0; i < L3_WAYS; i++) begin
        if (!l3_v[s][i]) begin w = i; break; end
        if (l3_t[s][i] < l3_t[s][w]) w = i;
      end
      if (l3_v[s][w] && l3_d[s][w]) evq.push_back('{EV_DIRTY_EVICT, CL_L3, l3_blk[s][w]});
      l3_v[s][w] = 1; l3_blk[s][w] = b; l3_d[s][w] = 0;
    end
    l3_d[s][w] = l3_d[s][w] | dirty;
    l3_t[s][w] = ++stamp;
  endtask

  // the L1 miss to block b was served from lvl; wr: the access writes
  task automatic serve(longint b, loc_t lvl, bit wr);
    int s = int'(b % L2_SETS);
    int w = l2_find(b);
    if (lvl == LOC_MEM) begin
      l3_insert(b, 0);
      evq.push_back('{EV_DEMAND_FILL, CL_L3, b});
    end else if (lvl == LOC_L3) begin
      l3_t[int'(b % L3_SETS)][l3_find(b)] = ++stamp;
    end
    if (w < 0) begin
      w = 0;
      for (int i = 0; i < L2_WAYS; i++) begin
        if (!l2_v[s][i]) begin w = i; break; end
        if (l2_t[s][i] < l2_t[s][w]) w = i;
      end
      if (l2_v[s][w] && l2_d[s][w]) begin
        evq.push_back('{EV_DIRTY_EVICT, CL_L2, l2_blk[s][w]});
        l3_insert(l2_blk[s][w], 1);
      end
      l2_v[s][w] = 1; l2_blk[s][w] = b; l2_d[s][w] = 0;
      evq.push_back('{EV_DEMAND_FILL, CL_L2, b});
    end
    l2_d[s][w] = l2_d[s][w] | wr;
    l2_t[s][w] = ++stamp;
  endtask

  // ---------------- one L1 miss through the design ----------------
  int k_seq, k_skip, k_opp, k_harm, k_map, k_pld, k_byp, k_multi;
  int k_rec;

  function automatic int rank(loc_t l);
    return (l == LOC_L2) ? 0 : (l == LOC_L3) ? 1 : 2;
  endfunction

  task automatic l1_miss(longint b, bit wr);
    loc_t truth, served;
    lvl_mask_t m;
    int near;
    dir_action_t exp_act;
    outcome_t    exp_out;
    truth = where(b);

    @(negedge clk); l1m_valid = 1; l1m_pa = PA_W'(b * 64);
    @(negedge clk); l1m_valid = 0;
    checks++;
    if (!pred_valid) begin fail("no prediction one cycle after the miss"); return; end
    m = pred_mask;
    if (pred_from_map) k_map++; else k_pld++;
    if (pred_ways > 1) k_multi++;
    near = m.l2 ? 0 : m.l3 ? 1 : 2;
    if (near > rank(truth))      begin k_harm++; exp_out = OUT_HARMFUL; end
    else if (near < rank(truth)) begin k_opp++;  exp_out = OUT_OPP_LOSS; end
    else if (truth == LOC_L2)    begin k_seq++;  exp_out = OUT_SEQUENTIAL; end
    else                         begin k_skip++; exp_out = OUT_SKIP; end

    checks++;
    if (l2_req_valid != m.l2) fail("L2 lookup does not follow the mask");
    served = truth;
    if (llc_req_valid) begin
      k_byp++;
      // LLC tag + directory lookup
      repeat (2) @(negedge clk);
      dir_valid = 1; dir_pa = PA_W'(b * 64); dir_mask = m; dir_actual = truth;
      @(negedge clk); dir_valid = 0;
      if (truth == LOC_L2)      exp_act = m.l2 ? ACT_NONE : ACT_REISSUE_L2;
      else if (truth == LOC_L3) exp_act = (m.l2 || m.l3) ? ACT_RESPOND_L3 : ACT_REISSUE_L3;
      else                      exp_act = ACT_FWD_MEM;
      checks++;
      if (!act_valid || act != exp_act || outcome != exp_out)
        fail($sformatf("blk %0h: action %s/%s expected %s/%s", b, act.name(), outcome.name(),
                       exp_act.name(), exp_out.name()));
      if (mispredict) k_rec++;
      if (exp_act != ACT_REISSUE_L2) begin
        // the answer arrives at L2 from the level that holds the block
        repeat ((exp_act == ACT_FWD_MEM) ? 8 : 3) @(negedge clk);
        resp_valid = 1; resp_pa = PA_W'(b * 64); resp_src = truth;
        @(negedge clk); resp_valid = 0;
        checks++;
        if (!l1_fill_valid || l1_fill_src != truth || l1_fill_line != LA_W'(b))
          fail($sformatf("blk %0h: no L1 fill from %s", b, truth.name()));
      end else begin
        @(negedge clk);
      end
      checks++;
      if (mshr_occupancy != 0) fail($sformatf("blk %0h: MSHR entry left behind", b));
    end

    // training report and cache events, one per cycle
    serve(b, served, wr);
    hit_valid = 1; hit_level = served;
    while (evq.size() > 0) begin
      ev_t e = evq.pop_front();
      ev_valid = 1; ev_kind = e.k; ev_level = e.l; ev_pa = PA_W'(e.blk * 64);
      @(negedge clk); hit_valid = 0; ev_valid = 0;
    end
    @(negedge clk); hit_valid = 0;
  endtask

  task automatic clear_counts();
    k_seq = 0; k_skip = 0; k_opp = 0; k_harm = 0; k_map = 0; k_pld = 0; k_byp = 0;
    k_multi = 0; k_rec = 0;
  endtask

  task automatic report(string name);
    int tot;
    tot = k_seq + k_skip + k_opp + k_harm;
    $display("%s: misses=%0d sequential=%0d skip=%0d opportunity-loss=%0d harmful=%0d",
             name, tot, k_seq, k_skip, k_opp, k_harm);
    $display("%s: locmap=%0d detector=%0d multi-way=%0d sent-past-L2=%0d recoveries=%0d correct=%0d.%0d%%",
             name, k_map, k_pld, k_multi, k_byp, k_rec,
             (tot == 0) ? 0 : (k_seq + k_skip) * 100 / tot,
             (tot == 0) ? 0 : ((k_seq + k_skip) * 1000 / tot) % 10);
  endtask

  localparam longint A_BLK = 64'h4000_0000 / 64;       // a at 1 GiB
  localparam longint C_BLK = 64'h8000_0000 / 64;       // c at 2 GiB
  localparam longint N_BLK = (4 * 1024 * 1024) / 64;   // 4 MiB arrays
  localparam longint T_BLK = 64'h1_0000_0000 / 64;     // gups table at 4 GiB
  localparam longint T_SIZE = 64'h2_0000_0000 / 64;    // 8 GiB

  initial begin
    for (int s = 0; s < L2_SETS; s++) for (int w = 0; w < L2_WAYS; w++) l2_v[s][w] = 0;
    for (int s = 0; s < L3_SETS; s++) for (int w = 0; w < L3_WAYS; w++) l3_v[s][w] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;

    // stream-copy: per element block, read a, write c
    for (int pass = 0; pass < 2; pass++) begin
      clear_counts();
      for (longint i = 0; i < N_BLK; i++) begin
        l1_miss(A_BLK + i, 0);
        l1_miss(C_BLK + i, 1);
      end
      report($sformatf("stream-copy pass %0d", pass + 1));
      checks++;
      if (k_map == 0) fail("stream-copy never used the LocMap");
    end

    // gups: random read-modify-write
    clear_counts();
    for (int i = 0; i < 40000; i++) begin
      longint r;
      r = {$urandom, $urandom};
      l1_miss(T_BLK + (r & 64'h7fff_ffff_ffff_ffff) % T_SIZE, 1);
    end
    report("gups");
    checks++;
    // 8 GiB of random addresses span 512 Ki LocMap lines: the metadata cache
    // practically never hits, and the detector carries the predictions
    if (k_pld == 0) fail("gups never used the detector");
    $display("locmap traffic: line reads=%0d write-backs=%0d", n_reads, n_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
