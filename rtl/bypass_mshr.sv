// bypass_mshr: L2 miss status holding registers for requests that skip L2.
//
// When the predictor sends an L1 miss past L2, L2 still allocates an MSHR
// entry for it, exactly as for an L2 miss but without looking up its tags;
// otherwise the fill coming back from the LLC or memory would find nothing
// to deliver to. A second request for a block that already has an entry is
// merged into it (the target count grows) instead of taking a new entry.
//
// On the return path every response is matched against the entries by
// block address. The first response for an entry is forwarded to L1 and the
// entry is freed. With a multi-way prediction more than one level answers;
// the later answers find no entry and are dropped here, which is how the
// unnecessary parallel lookups are terminated. A recovery can also free an
// entry without a fill (dealloc port), when another path serves L1.
//
// Interface: alloc_valid/alloc_line with alloc_ready (an entry is free or
// one already holds the line; comb.); resp_valid/resp_line/resp_src; the L1
// fill and the drop strobe are registered, one cycle after the response.
// Line addresses are 64-byte block numbers.
//
// From the paper: MSHR allocation at bypassed levels, deallocation on
// recovery, address matching on the return path to end parallel accesses.
// This design's own choices: the entry count (the paper gives none for L2),
// lowest-free-index allocation, and that a fill and a deallocation in the
// same cycle both free the entry.
module bypass_mshr
  import lp_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned LA_W    = LINE_ADDR_W,
  parameter int unsigned TGT_W   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // allocation (a request that skips L2)
  input  logic              alloc_valid,
  input  logic [LA_W-1:0]   alloc_line,
  output logic              alloc_ready,
  // responses arriving at L2 from L2 (parallel lookup), the LLC or memory
  input  logic              resp_valid,
  input  logic [LA_W-1:0]   resp_line,
  input  loc_t              resp_src,
  // recovery deallocation
  input  logic              dealloc_valid,
  input  logic [LA_W-1:0]   dealloc_line,
  // to L1
  output logic              l1_fill_valid,
  output logic [LA_W-1:0]   l1_fill_line,
  output loc_t              l1_fill_src,
  output logic [TGT_W-1:0]  l1_fill_targets,
  output logic              resp_dropped,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic              v_q   [ENTRIES];
  logic [LA_W-1:0]   line_q[ENTRIES];
  logic [TGT_W-1:0]  tgt_q [ENTRIES];

  logic              a_hit, r_hit, d_hit, has_free;
  logic [IDX_W-1:0]  a_idx, r_idx, d_idx, f_idx;

  always_comb begin
    a_hit = 1'b0; r_hit = 1'b0; d_hit = 1'b0; has_free = 1'b0;
    a_idx = '0;   r_idx = '0;   d_idx = '0;   f_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (v_q[i] && line_q[i] == alloc_line)   begin a_hit = 1'b1; a_idx = IDX_W'(i); end
      if (v_q[i] && line_q[i] == resp_line)    begin r_hit = 1'b1; r_idx = IDX_W'(i); end
      if (v_q[i] && line_q[i] == dealloc_line) begin d_hit = 1'b1; d_idx = IDX_W'(i); end
      if (!v_q[i])                             begin has_free = 1'b1; f_idx = IDX_W'(i); end
    end
    alloc_ready = a_hit || has_free;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) v_q[i] <= 1'b0;
      l1_fill_valid <= 1'b0;
      resp_dropped  <= 1'b0;
    end else begin
      l1_fill_valid <= resp_valid && r_hit;
      resp_dropped  <= resp_valid && !r_hit;
      if (resp_valid && r_hit) begin
        l1_fill_line    <= line_q[r_idx];
        l1_fill_src     <= resp_src;
        // a request merging in the same cycle is served by this fill too
        l1_fill_targets <= (alloc_valid && a_hit && a_idx == r_idx && tgt_q[r_idx] != '1)
                           ? tgt_q[r_idx] + 1'b1 : tgt_q[r_idx];
      end
      if (alloc_valid && a_hit) begin
        if (tgt_q[a_idx] != '1) tgt_q[a_idx] <= tgt_q[a_idx] + 1'b1;
      end else if (alloc_valid && has_free) begin
        v_q[f_idx]    <= 1'b1;
        line_q[f_idx] <= alloc_line;
        tgt_q[f_idx]  <= TGT_W'(1);
      end
      if (resp_valid && r_hit)       v_q[r_idx] <= 1'b0;
      if (dealloc_valid && d_hit)    v_q[d_idx] <= 1'b0;
    end
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++) occupancy = occupancy + v_q[i];
  end

  // No allocation is offered to a full MSHR file.
  assert property (@(posedge clk) disable iff (!rst_n) alloc_valid |-> alloc_ready);

endmodule
