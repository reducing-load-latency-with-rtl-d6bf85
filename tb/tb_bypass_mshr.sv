// tb_bypass_mshr: checks the L2 bypass MSHRs against a reference list of
// outstanding blocks kept here. Directed: allocate, merge a second request,
// first response fills L1 with both targets, a duplicate response from a
// parallel lookup is dropped, recovery deallocation frees without a fill,
// the file fills up and alloc_ready falls. Random: allocations, responses
// and deallocations on a small address range, every fill and drop compared
// with the reference one cycle after the response.
module tb_bypass_mshr;
  import lp_pkg::*;

  localparam int N = 4;
  localparam int LA_W = 28;

  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0; logic [LA_W-1:0] alloc_line = 0; logic alloc_ready;
  logic resp_valid = 0; logic [LA_W-1:0] resp_line = 0; loc_t resp_src = LOC_L3;
  logic dealloc_valid = 0; logic [LA_W-1:0] dealloc_line = 0;
  logic l1_fill_valid; logic [LA_W-1:0] l1_fill_line; loc_t l1_fill_src;
  logic [3:0] l1_fill_targets; logic resp_dropped; logic [$clog2(N+1)-1:0] occupancy;
  int checks = 0, failures = 0;
  int n_fill = 0, n_drop = 0, n_merge = 0, n_full = 0;

  bypass_mshr #(.ENTRIES(N), .LA_W(LA_W)) dut (.*);
  always #5 clk = ~clk;

  int ref_tgt [logic [LA_W-1:0]];   // outstanding line -> targets

  // one cycle: apply inputs, compute expectations from the reference
  task automatic step(logic av, logic [LA_W-1:0] al, logic rv, logic [LA_W-1:0] rl,
                      loc_t rs, logic dv, logic [LA_W-1:0] dl);
    logic exp_fill, exp_drop, exp_ready, d_exist;
    int exp_tgt;
    @(negedge clk);
    alloc_valid = av; alloc_line = al; resp_valid = rv; resp_line = rl; resp_src = rs;
    dealloc_valid = dv; dealloc_line = dl;
    exp_ready = ref_tgt.exists(al) || (ref_tgt.num() < N);
    #1;
    checks++;
    if (alloc_ready != exp_ready) begin failures++; $display("FAIL alloc_ready %0d", alloc_ready); end
    if (!alloc_ready) begin alloc_valid = 0; av = 0; n_full++; end
    d_exist  = dv && ref_tgt.exists(dl);     // matched before this cycle's allocation
    exp_fill = rv && ref_tgt.exists(rl);
    exp_drop = rv && !ref_tgt.exists(rl);
    exp_tgt  = exp_fill ? ref_tgt[rl] : 0;
    if (av && ref_tgt.exists(al)) begin
      n_merge++;
      if (exp_fill && al == rl) exp_tgt++;
    end
    // reference update, same order as the hardware: alloc, then frees
    if (av) begin
      if (ref_tgt.exists(al)) begin if (ref_tgt[al] < 15) ref_tgt[al]++; end
      else ref_tgt[al] = 1;
    end
    if (exp_fill) ref_tgt.delete(rl);
    if (d_exist && ref_tgt.exists(dl)) ref_tgt.delete(dl);
    @(posedge clk); #1;
    alloc_valid = 0; resp_valid = 0; dealloc_valid = 0;
    checks++;
    if (l1_fill_valid != exp_fill || resp_dropped != exp_drop ||
        (exp_fill && (l1_fill_line != rl || l1_fill_src != rs || int'(l1_fill_targets) != exp_tgt)) ||
        int'(occupancy) != ref_tgt.num()) begin
      failures++;
      $display("FAIL t=%0t fill=%0d/%0d drop=%0d/%0d tgt=%0d/%0d occ=%0d/%0d", $time,
               l1_fill_valid, exp_fill, resp_dropped, exp_drop, l1_fill_targets, exp_tgt,
               occupancy, ref_tgt.num());
    end
    if (exp_fill) n_fill++;
    if (exp_drop) n_drop++;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    step(1, 28'h10, 0, 0, LOC_L3, 0, 0);          // allocate
    step(1, 28'h10, 0, 0, LOC_L3, 0, 0);          // merge: 2 targets
    step(0, 0, 1, 28'h10, LOC_L3, 0, 0);          // LLC answers: fill, 2 targets
    checks++; if (l1_fill_targets != 2) failures++;
    step(0, 0, 1, 28'h10, LOC_MEM, 0, 0);         // memory answers too: dropped
    checks++; if (!resp_dropped) failures++;
    step(1, 28'h20, 0, 0, LOC_L3, 0, 0);
    step(0, 0, 0, 0, LOC_L3, 1, 28'h20);          // recovery frees it
    step(0, 0, 1, 28'h20, LOC_L3, 0, 0);          // a late answer is dropped
    checks++; if (!resp_dropped || occupancy != 0) failures++;
    for (int i = 0; i < N + 1; i++) step(1, LA_W'(28'h30 + i), 0, 0, LOC_L3, 0, 0);
    checks++; if (alloc_ready || occupancy != N) begin failures++; $display("FAIL not full"); end
    for (int i = 0; i < 3000; i++)
      step($urandom % 2 == 0, LA_W'(28'h30 + $urandom % 8),
           $urandom % 2 == 0, LA_W'(28'h30 + $urandom % 8), loc_t'($urandom % 3),
           $urandom % 6 == 0, LA_W'(28'h30 + $urandom % 8));
    checks++;
    if (n_fill == 0 || n_drop == 0 || n_merge == 0 || n_full == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("fills=%0d drops=%0d merges=%0d full=%0d", n_fill, n_drop, n_merge, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
