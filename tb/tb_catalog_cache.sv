// tb_catalog_cache: checks the LocMap metadata cache against a golden copy
// of the LocMap kept in this testbench.
//
// A memory model answers line reads after MEM_LAT cycles with either the
// line last written back or a fixed pattern computed from the line address,
// and accepts write-backs with random back-pressure. The golden LocMap is
// that pattern plus every update the cache reports as written or queued.
// Checked: lookup answers one cycle after the request; every lookup hit
// returns the golden code; every write-back carries the golden line;
// directed cases for miss-then-fill, LRU replacement in a 2-way set, a
// prefetch-style update (no allocation) dropped on a miss without a memory
// read, an allocating update applied after the fetch, and write-back of a
// dirty victim, and the update queue: allocating misses that arrive while a
// fetch is in flight are queued up to its depth, one more is dropped, and
// every queued one is in the cache afterwards. A random phase over more lines than the cache holds must see
// hits, misses, write-backs and merged updates.
module tb_catalog_cache;
  import lp_pkg::*;

  localparam int LA_W = 28;
  localparam int MEM_LAT = 6;
  localparam int SETS = 16;
  localparam int UPQ = 4;

  logic clk = 0, rst_n = 0;
  logic lk_valid = 0; logic [LA_W-1:0] lk_line = 0; logic [SLOT_W-1:0] lk_slot = 0;
  logic lk_resp_valid, lk_resp_hit; loc_t lk_resp_loc;
  logic up_valid = 0; logic [LA_W-1:0] up_line = 0; logic [SLOT_W-1:0] up_slot = 0;
  loc_t up_loc = LOC_MEM; logic up_alloc = 0;
  logic up_resp_valid, up_resp_hit, up_resp_queued, up_resp_dropped;
  logic mem_rd_valid, mem_rd_ready; logic [LA_W-1:0] mem_rd_line;
  logic mem_rd_resp_valid; logic [LINE_BITS-1:0] mem_rd_resp_data;
  logic mem_wr_valid, mem_wr_ready; logic [LA_W-1:0] mem_wr_line; logic [LINE_BITS-1:0] mem_wr_data;
  logic busy;

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_merge = 0, n_rd = 0, n_adrop = 0;

  catalog_cache #(.CACHE_BYTES(2048), .WAYS(2), .LA_W(LA_W), .UPQ_DEPTH(UPQ)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [LINE_BITS-1:0] pattern(logic [LA_W-1:0] line);
    logic [LINE_BITS-1:0] d;
    for (int i = 0; i < 16; i++) d[32*i +: 32] = 32'(line) * 32'd2654435761 + 32'(i) * 32'd40503;
    return d;
  endfunction

  // memory model and golden LocMap
  logic [LINE_BITS-1:0] mem_store [logic [LA_W-1:0]];
  logic [LINE_BITS-1:0] golden    [logic [LA_W-1:0]];

  function automatic logic [LINE_BITS-1:0] gold_line(logic [LA_W-1:0] l);
    return golden.exists(l) ? golden[l] : pattern(l);
  endfunction
  function automatic logic [LINE_BITS-1:0] mem_line(logic [LA_W-1:0] l);
    return mem_store.exists(l) ? mem_store[l] : pattern(l);
  endfunction

  int rd_timer = -1;
  logic [LA_W-1:0] rd_addr;
  always_ff @(posedge clk) begin
    mem_wr_ready <= ($urandom % 3 != 0);
    if (rst_n && mem_rd_valid && mem_rd_ready && rd_timer < 0) begin
      rd_timer <= MEM_LAT; rd_addr <= mem_rd_line; n_rd <= n_rd + 1;
    end else if (rd_timer > 0) rd_timer <= rd_timer - 1;
    else if (rd_timer == 0) rd_timer <= -1;
    if (rst_n && mem_wr_valid && mem_wr_ready) begin
      mem_store[mem_wr_line] = mem_wr_data;
      n_wb <= n_wb + 1;
      checks++;
      if (mem_wr_data != gold_line(mem_wr_line)) begin
        failures++;
        $display("FAIL write-back of line %0h differs from golden", mem_wr_line);
      end
    end
  end
  assign mem_rd_ready      = 1'b1;
  assign mem_rd_resp_valid = (rd_timer == 0);
  assign mem_rd_resp_data  = mem_line(rd_addr);

  // response checks: one cycle after the request
  logic lk_q = 0, up_q = 0;
  logic [LA_W-1:0] lk_line_q, up_line_q; logic [SLOT_W-1:0] lk_slot_q, up_slot_q;
  loc_t up_loc_q; logic up_alloc_q;
  logic [LINE_BITS-1:0] exp_line_q;
  always_ff @(posedge clk) begin
    lk_q <= lk_valid && rst_n; lk_line_q <= lk_line; lk_slot_q <= lk_slot;
    exp_line_q <= gold_line(lk_line);   // value at request time
    up_q <= up_valid && rst_n; up_line_q <= up_line; up_slot_q <= up_slot;
    up_loc_q <= up_loc; up_alloc_q <= up_alloc;
  end
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (lk_resp_valid != lk_q || up_resp_valid != up_q) begin
      failures++; $display("FAIL response strobe timing at %0t", $time);
    end
    if (lk_q) begin
      if (lk_resp_hit) begin
        n_hit++;
        checks++;
        if (lk_resp_loc != loc_t'(exp_line_q[2*lk_slot_q +: 2])) begin
          failures++;
          $display("FAIL lookup line %0h slot %0d: %0d expected %0d", lk_line_q, lk_slot_q,
                   lk_resp_loc, exp_line_q[2*lk_slot_q +: 2]);
        end
      end else n_miss++;
    end
    if (up_q) begin
      checks++;
      if ((up_resp_hit + up_resp_queued + up_resp_dropped) != 1) begin
        failures++; $display("FAIL update response not exactly one of hit/queued/dropped");
      end
      if (!up_alloc_q && up_resp_queued) begin
        failures++; $display("FAIL non-allocating update was queued");
      end
      if (up_resp_hit || up_resp_queued) begin
        logic [LINE_BITS-1:0] g;
        g = gold_line(up_line_q);
        g[2*up_slot_q +: 2] = up_loc_q;
        golden[up_line_q] = g;
      end
      if (up_resp_queued) n_merge++;
      if (up_resp_dropped && up_alloc_q) n_adrop++;
    end
  end

  task automatic lookup(logic [LA_W-1:0] l, logic [SLOT_W-1:0] s);
    @(negedge clk); lk_valid = 1; lk_line = l; lk_slot = s;
    @(negedge clk); lk_valid = 0;
  endtask
  task automatic update(logic [LA_W-1:0] l, logic [SLOT_W-1:0] s, loc_t v, logic a);
    @(negedge clk); up_valid = 1; up_line = l; up_slot = s; up_loc = v; up_alloc = a;
    @(negedge clk); up_valid = 0;
  endtask
  task automatic wait_idle();
    do @(negedge clk); while (busy);
  endtask
  task automatic expect_hit(logic [LA_W-1:0] l, logic [SLOT_W-1:0] s, logic hit, string what);
    @(negedge clk); lk_valid = 1; lk_line = l; lk_slot = s;
    @(posedge clk); #1;
    checks++;
    if (lk_resp_hit != hit) begin
      failures++; $display("FAIL %s: hit=%0d expected %0d", what, lk_resp_hit, hit);
    end
    @(negedge clk); lk_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rd0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // miss, fetch, then hit
    expect_hit(28'h100, 5, 0, "cold lookup");
    wait_idle();
    expect_hit(28'h100, 5, 1, "after fill");
    // LRU: 0x110 and 0x120 share the set of 0x100
    lookup(28'h110, 0); wait_idle();
    expect_hit(28'h100, 1, 1, "A still present");      // A most recent -> B is LRU
    lookup(28'h120, 0); wait_idle();                     // evicts 0x110
    expect_hit(28'h100, 2, 1, "A kept by LRU");
    expect_hit(28'h110, 2, 0, "B evicted by LRU");
    wait_idle();
    // non-allocating update on a miss: dropped, no memory read
    rd0 = n_rd;
    update(28'h555, 9, LOC_L3, 0);
    repeat (3) @(negedge clk);
    checks++;
    if (n_rd != rd0 || busy) begin failures++; $display("FAIL prefetch update fetched a line"); end
    // allocating update on a miss: fetched then applied
    update(28'h556, 9, LOC_L2, 1);
    wait_idle();
    expect_hit(28'h556, 9, 1, "allocated by update");
    // dirty victim written back: 0x566 and 0x576 evict 0x556 (dirty)
    lookup(28'h566, 0); wait_idle();
    lookup(28'h576, 0); wait_idle();
    lookup(28'h586, 0); wait_idle();
    repeat (4) @(negedge clk);
    checks++;
    if (n_wb == 0) begin failures++; $display("FAIL no write-back of a dirty line"); end

    // update queue: UPQ allocating misses to distinct lines during a fetch
    // are queued, the next one is dropped, the queued ones all land
    begin
      int d0;
      d0 = n_adrop;
      lookup(28'h700, 0);
      for (int k = 0; k <= UPQ; k++) begin
        @(negedge clk);
        up_valid = 1; up_line = LA_W'(28'h711 + k); up_slot = SLOT_W'(k + 1);
        up_loc = LOC_L3; up_alloc = 1;
      end
      @(negedge clk); up_valid = 0;
      wait_idle();
      checks++;
      if (n_adrop - d0 != 1) begin
        failures++; $display("FAIL queue overflow: %0d allocating updates dropped, expected 1", n_adrop - d0);
      end
      for (int k = 0; k < UPQ; k++) expect_hit(LA_W'(28'h711 + k), SLOT_W'(k + 1), 1, "queued update fetched");
      expect_hit(LA_W'(28'h711 + UPQ), 0, 0, "overflowing update not fetched");
      wait_idle();
    end

    // random phase over 48 lines (3 per set)
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      lk_valid = ($urandom % 2 == 0);
      lk_line  = LA_W'(28'h4000 + ($urandom % 48));
      lk_slot  = SLOT_W'($urandom % 4);
      up_valid = ($urandom % 3 == 0);
      up_line  = ($urandom % 2) ? lk_line : LA_W'(28'h4000 + ($urandom % 48));
      up_slot  = SLOT_W'($urandom % 4);
      up_loc   = loc_t'($urandom % 3);
      up_alloc = ($urandom % 4 != 0);
    end
    @(negedge clk); lk_valid = 0; up_valid = 0;
    wait_idle();
    repeat (5) @(negedge clk);
    checks++;
    if (n_hit == 0 || n_miss == 0 || n_wb < 2 || n_merge == 0) begin
      failures++; $display("FAIL coverage hit=%0d miss=%0d wb=%0d queued=%0d", n_hit, n_miss, n_wb, n_merge);
    end
    $display("hits=%0d misses=%0d writebacks=%0d queued=%0d reads=%0d", n_hit, n_miss, n_wb, n_merge, n_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
