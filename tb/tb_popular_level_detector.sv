// tb_popular_level_detector: drives streams of served-level reports with
// changing bias and compares the counters and the predicted level mask with
// a reference model written here in plain integer code (+1 to the served
// level, -1 to the others, floor at zero; rank with ties to the nearer
// level; single-way above THRESH_ONE, three-way when the top two sum below
// THRESH_TWO). Uses small thresholds and checks every cycle; also requires
// that single-, two- and three-way predictions each occurred.
module tb_popular_level_detector;
  import lp_pkg::*;

  localparam int T1 = 6, T2 = 10;

  logic clk = 0, rst_n = 0;
  logic hit_valid = 0;
  loc_t hit_level = LOC_L2;
  lvl_mask_t pred_mask;
  logic [1:0] pred_ways;
  logic [31:0] cnt_l2, cnt_l3, cnt_mem;
  int checks = 0, failures = 0;
  int ref_c [3];
  int seen_ways [4];

  popular_level_detector #(.CNT_W(32), .THRESH_ONE(T1), .THRESH_TWO(T2)) dut (
    .clk, .rst_n, .hit_valid, .hit_level, .pred_mask, .pred_ways, .cnt_l2, .cnt_l3, .cnt_mem);

  always #5 clk = ~clk;

  function automatic int rank_of(loc_t l);
    return (l == LOC_L2) ? 0 : (l == LOC_L3) ? 1 : 2;
  endfunction

  task automatic check_now();
    int order [3];
    int tmp;
    logic [2:0] m;
    order = '{0, 1, 2};
    // stable sort by count, descending (ties keep the nearer level first)
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
    checks++;
    if (pred_mask != lvl_mask_t'(m) || int'(cnt_l2) != ref_c[0] ||
        int'(cnt_l3) != ref_c[1] || int'(cnt_mem) != ref_c[2] ||
        int'(pred_ways) != $countones(m)) begin
      failures++;
      $display("FAIL t=%0t cnt=%0d/%0d/%0d ref=%0d/%0d/%0d mask=%b exp=%b",
               $time, cnt_l2, cnt_l3, cnt_mem, ref_c[0], ref_c[1], ref_c[2], pred_mask, m);
    end
    seen_ways[$countones(m)]++;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_c = '{0, 0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_now();    // all zero: three-way
    for (int phase = 0; phase < 12; phase++) begin
      int bias;
      bias = phase % 4;   // 0: L2 heavy, 1: L3 heavy, 2: memory heavy, 3: uniform
      for (int k = 0; k < 120; k++) begin
        int r;
        loc_t l;
        r = int'($urandom % 100);
        if (bias == 3)       l = (r < 33) ? LOC_L2 : (r < 66) ? LOC_L3 : LOC_MEM;
        else if (r < 75)     l = (bias == 0) ? LOC_L2 : (bias == 1) ? LOC_L3 : LOC_MEM;
        else                 l = (r < 88) ? LOC_L2 : LOC_L3;
        if ($urandom % 8 == 0) l = LOC_RSVD;     // ignored code
        hit_valid = ($urandom % 4 != 0);
        hit_level = l;
        @(posedge clk);
        if (hit_valid && l != LOC_RSVD)
          for (int i = 0; i < 3; i++)
            if (i == rank_of(l)) ref_c[i]++;
            else if (ref_c[i] > 0) ref_c[i]--;
        @(negedge clk);
        hit_valid = 0;
        check_now();
      end
    end
    for (int w = 1; w <= 3; w++) begin
      checks++;
      if (seen_ways[w] == 0) begin
        failures++;
        $display("FAIL: no %0d-way prediction seen", w);
      end
    end
    $display("ways seen: 1=%0d 2=%0d 3=%0d", seen_ways[1], seen_ways[2], seen_ways[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
