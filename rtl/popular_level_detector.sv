// popular_level_detector: the history predictor used on a metadata miss.
//
// Three counters, one each for L2, L3 and main memory. When an access is
// served by a level, that level's counter goes up by one and the other two
// go down by one, so the counters follow the recently popular level without
// running away. For a prediction the counters are ranked: the largest
// counter's level is always looked up; if that counter is not above
// THRESH_ONE the second-ranked level is added, and if the sum of the top two
// does not reach THRESH_TWO the third level is added as well. The result is
// a one-, two- or three-way prediction mask.
//
// From the paper: three 32-bit counters, +1/-1 update, ranking, the two
// threshold tests. This design's own choices: counters saturate at zero and
// at their maximum and reset to zero; the threshold values (the paper gives
// none); ties rank the nearer level first (L2, then L3, then memory).
//
// Timing: the counters update on the clock edge after hit_valid; the
// prediction is combinational from the counters, so it is available in the
// same cycle it is asked for.
module popular_level_detector
  import lp_pkg::*;
#(
  parameter int unsigned CNT_W      = 32,
  parameter int unsigned THRESH_ONE = 16,  // first counter above this -> single-way
  parameter int unsigned THRESH_TWO = 24   // top-two sum below this -> three-way
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             hit_valid,   // an L1 miss was served ...
  input  loc_t             hit_level,   // ... by this level
  output lvl_mask_t        pred_mask,   // levels to look up
  output logic [1:0]       pred_ways,   // number of bits set in pred_mask
  output logic [CNT_W-1:0] cnt_l2,
  output logic [CNT_W-1:0] cnt_l3,
  output logic [CNT_W-1:0] cnt_mem
);

  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  logic [CNT_W-1:0] cnt [3];   // index 0 = L2, 1 = L3, 2 = memory

  function automatic logic [CNT_W-1:0] inc_sat(logic [CNT_W-1:0] v);
    return (v == CNT_MAX) ? v : v + 1'b1;
  endfunction

  function automatic logic [CNT_W-1:0] dec_sat(logic [CNT_W-1:0] v);
    return (v == '0) ? v : v - 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) cnt[i] <= '0;
    end else if (hit_valid && hit_level != LOC_RSVD) begin
      for (int i = 0; i < 3; i++) begin
        if (int'(loc_rank(hit_level)) == i) cnt[i] <= inc_sat(cnt[i]);
        else                                cnt[i] <= dec_sat(cnt[i]);
      end
    end
  end

  // Ranking. beats[i][j]: level i ranks above level j (ties go to the
  // nearer level, the lower index).
  logic [1:0]       first, second, third;
  logic [CNT_W:0]   top_sum;
  logic [2:0]       sel;

  always_comb begin
    logic beats [3][3];
    logic [1:0] nwins [3];
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        beats[i][j] = (i < j) ? (cnt[i] >= cnt[j]) : (cnt[i] > cnt[j]);
    first = 2'd0; second = 2'd0; third = 2'd0;
    for (int i = 0; i < 3; i++) begin
      nwins[i] = 2'd0;
      for (int j = 0; j < 3; j++)
        if (i != j && beats[i][j]) nwins[i] = nwins[i] + 2'd1;
    end
    for (int i = 0; i < 3; i++) begin
      if (nwins[i] == 2'd2) first  = 2'(i);
      if (nwins[i] == 2'd1) second = 2'(i);
      if (nwins[i] == 2'd0) third  = 2'(i);
    end

    top_sum = {1'b0, cnt[first]} + {1'b0, cnt[second]};
    sel = '0;
    sel[first] = 1'b1;
    if (cnt[first] <= CNT_W'(THRESH_ONE)) begin
      sel[second] = 1'b1;
      if (top_sum < (CNT_W+1)'(THRESH_TWO)) sel[third] = 1'b1;
    end
    pred_mask = '{mem: sel[2], l3: sel[1], l2: sel[0]};
    pred_ways = 2'(sel[0]) + 2'(sel[1]) + 2'(sel[2]);
  end

  assign cnt_l2  = cnt[0];
  assign cnt_l3  = cnt[1];
  assign cnt_mem = cnt[2];

endmodule
