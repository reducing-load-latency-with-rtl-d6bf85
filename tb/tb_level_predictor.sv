// tb_level_predictor: runs random L1 misses, cache events and served-level
// reports through the level predictor and checks every prediction.
//
// A golden LocMap is kept here: the memory model's initial codes plus each
// event the predictor reports as applied, translated by the update rule
// (fill into L2 -> L2, fill into L3 -> L3, dirty eviction from L2 -> L3,
// dirty eviction from L3 -> memory). A reference of the three detector
// counters follows the served-level reports. Checked on every request: the
// prediction appears exactly one cycle later with the request's address; a
// metadata hit gives the golden level alone; a metadata miss gives the
// reference detector's mask. Both kinds of prediction, LocMap fetches and
// write-backs, and applied and dropped events must all occur.
module tb_level_predictor;
  import lp_pkg::*;

  localparam int LA_W = PA_W - OFFSET_W;
  localparam int T1 = 16, T2 = 24;
  localparam logic [LA_W-1:0] BASE = 28'h3C0_0000;   // LocMap at 15 GiB

  logic clk = 0, rst_n = 0;
  logic req_valid = 0; logic [PA_W-1:0] req_pa = 0;
  logic pred_valid; logic [PA_W-1:0] pred_pa; lvl_mask_t pred_mask; logic [1:0] pred_ways;
  logic pred_from_map;
  logic ev_valid = 0; ev_kind_t ev_kind = EV_DEMAND_FILL; cache_lvl_t ev_level = CL_L2;
  logic [PA_W-1:0] ev_pa = 0; logic ev_applied;
  logic hit_valid = 0; loc_t hit_level = LOC_L2;
  logic mem_rd_valid, mem_rd_ready; logic [LA_W-1:0] mem_rd_line;
  logic mem_rd_resp_valid; logic [LINE_BITS-1:0] mem_rd_resp_data;
  logic mem_wr_valid, mem_wr_ready; logic [LA_W-1:0] mem_wr_line; logic [LINE_BITS-1:0] mem_wr_data;
  int n_reads, n_writes;

  int checks = 0, failures = 0;
  int n_map = 0, n_pld = 0, n_applied = 0, n_notapplied = 0;

  level_predictor #(.THRESH_ONE(T1), .THRESH_TWO(T2)) dut (
    .clk, .rst_n, .base_line (BASE),
    .req_valid, .req_pa, .pred_valid, .pred_pa, .pred_mask, .pred_ways, .pred_from_map,
    .ev_valid, .ev_kind, .ev_level, .ev_pa, .ev_applied, .hit_valid, .hit_level,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_line, .mem_rd_resp_valid, .mem_rd_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_line, .mem_wr_data);

  tb_locmap_mem #(.LA_W(LA_W), .LAT(10)) mem (
    .clk, .rd_valid (mem_rd_valid), .rd_ready (mem_rd_ready), .rd_line (mem_rd_line),
    .rd_resp_valid (mem_rd_resp_valid), .rd_resp_data (mem_rd_resp_data),
    .wr_valid (mem_wr_valid), .wr_ready (mem_wr_ready), .wr_line (mem_wr_line),
    .wr_data (mem_wr_data), .n_reads, .n_writes);

  always #5 clk = ~clk;

  int golden [longint];   // block number -> code
  int ref_c [3];

  function automatic int gold(logic [PA_W-1:0] pa);
    longint blk, line, slot;
    blk = longint'(pa) / 64;
    if (golden.exists(blk)) return golden[blk];
    line = longint'(BASE) + longint'(pa) / 16384;
    slot = blk % 256;
    return int'((7 * line + 3 * slot) % 3);
  endfunction

  function automatic logic [2:0] ref_pld();
    int order [3];
    int tmp;
    logic [2:0] m;
    order = '{0, 1, 2};
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2 - i; j++)
        if (ref_c[order[j+1]] > ref_c[order[j]]) begin
          tmp = order[j]; order[j] = order[j+1]; order[j+1] = tmp;
        end
    m = '0;
    m[order[0]] = 1'b1;
    if (ref_c[order[0]] <= T1) begin
      m[order[1]] = 1'b1;
      if (ref_c[order[0]] + ref_c[order[1]] < T2) m[order[2]] = 1'b1;
    end
    return m;
  endfunction

  // code -> mask bit (code 1 = L2 -> bit 0, 2 = L3 -> bit 1, 0 = memory -> bit 2)
  function automatic logic [2:0] code_mask(int c);
    return (c == 1) ? 3'b001 : (c == 2) ? 3'b010 : 3'b100;
  endfunction

  function automatic int new_code(ev_kind_t k, cache_lvl_t l);
    if (k == EV_DIRTY_EVICT) return (l == CL_L2) ? 2 : 0;
    return (l == CL_L2) ? 1 : 2;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic prev_req = 0, prev_ev = 0, prev_hit = 0;
  logic [PA_W-1:0] prev_req_pa, prev_ev_pa;
  ev_kind_t prev_kind; cache_lvl_t prev_lvl; loc_t prev_hit_level;
  int cycles = 0;

  // 64 LocMap lines' worth of memory, 4 blocks in each 16 KiB region
  function automatic logic [PA_W-1:0] rand_pa();
    return PA_W'(34'h1_0000_0000 + longint'($urandom % 64) * 16384 + longint'($urandom % 4) * 64);
  endfunction

  always @(negedge clk) begin
    if (rst_n) begin
      cycles++;
      // 1. detector reference sees last cycle's report
      if (prev_hit && prev_hit_level != LOC_RSVD)
        for (int i = 0; i < 3; i++) begin
          int r;
          r = (prev_hit_level == LOC_L2) ? 0 : (prev_hit_level == LOC_L3) ? 1 : 2;
          if (i == r) ref_c[i]++; else if (ref_c[i] > 0) ref_c[i]--;
        end
      // 2. prediction check
      checks++;
      if (pred_valid != prev_req) begin
        failures++; $display("FAIL prediction strobe at cycle %0d", cycles);
      end
      if (prev_req) begin
        logic [2:0] exp;
        if (pred_from_map) begin exp = code_mask(gold(prev_req_pa)); n_map++; end
        else               begin exp = ref_pld();                    n_pld++; end
        checks++;
        if (pred_mask != lvl_mask_t'(exp) || pred_pa != prev_req_pa ||
            int'(pred_ways) != $countones(exp)) begin
          failures++;
          $display("FAIL pa=%0h map=%0d mask=%b expected %b", prev_req_pa, pred_from_map, pred_mask, exp);
        end
      end
      // 3. golden LocMap follows applied events
      if (prev_ev) begin
        if (ev_applied) begin golden[longint'(prev_ev_pa) / 64] = new_code(prev_kind, prev_lvl); n_applied++; end
        else n_notapplied++;
      end
    end
    // 4. new stimulus
    req_valid = rst_n && ($urandom % 2 == 0);
    req_pa    = rand_pa();
    ev_valid  = rst_n && ($urandom % 3 == 0);
    ev_pa     = ($urandom % 2) ? req_pa : rand_pa();
    ev_kind   = ev_kind_t'($urandom % 3);
    ev_level  = cache_lvl_t'($urandom % 2);
    hit_valid = rst_n && ($urandom % 2 == 0);
    hit_level = (cycles % 600 < 300) ? (($urandom % 4 == 0) ? LOC_L2 : LOC_L3)
                                     : loc_t'($urandom % 3);
    prev_req = req_valid; prev_req_pa = req_pa;
    prev_ev = ev_valid; prev_ev_pa = ev_pa; prev_kind = ev_kind; prev_lvl = ev_level;
    prev_hit = hit_valid; prev_hit_level = hit_level;
  end

  initial begin
    ref_c = '{0, 0, 0};
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    repeat (8000) @(posedge clk);
    checks++;
    if (n_map == 0 || n_pld == 0 || n_reads == 0 || n_writes == 0 ||
        n_applied == 0 || n_notapplied == 0) begin
      failures++;
      $display("FAIL coverage map=%0d pld=%0d reads=%0d writes=%0d applied=%0d not=%0d",
               n_map, n_pld, n_reads, n_writes, n_applied, n_notapplied);
    end
    $display("map=%0d pld=%0d reads=%0d writes=%0d applied=%0d not=%0d",
             n_map, n_pld, n_reads, n_writes, n_applied, n_notapplied);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
