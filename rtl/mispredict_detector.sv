// mispredict_detector: level misprediction detection and recovery decision
// at the LLC / directory.
//
// A request that skipped L2 reaches the LLC carrying its prediction mask.
// The directory sits with the LLC tags, so the tag lookup also tells where
// the block actually is: in this core's L2, in the LLC, or only in memory.
// From that and the mask this unit chooses what the LLC controller does:
//
//   actual L2,  L2 not looked up -> REISSUE_L2: recovery, a new request goes
//                                   to L2, which serves L1 (Fig. 11b)
//   actual L2,  L2 looked up too -> NONE: the parallel L2 lookup serves it
//   actual LLC, LLC predicted    -> RESPOND_L3 (Fig. 11a)
//   actual LLC, memory-only      -> REISSUE_L3: recovery, the LLC data array
//                                   is read after all
//   actual mem                   -> FWD_MEM: the request goes on to memory
//                                   (Fig. 11c); the directory is always
//                                   consulted before memory is accessed
//
// When the block is in L2, the LLC's own MSHR entry for the request is
// released (release_l3_mshr): on recovery all MSHR entries past the actual
// level are freed. mispredict is raised for the two recovery actions, and
// every result is classified as sequential / skip / opportunity loss /
// harmful (the accuracy categories).
//
// Timing: one registered stage; the decision appears one cycle after
// dir_valid. From the paper: detection by the directory, reissue to the
// actual level, deallocation of MSHR entries past it, forwarding to memory
// after the directory check. This design's own choices: the action
// encoding, treating a memory-only prediction as "LLC checks tags and
// directory only", and the single pipeline stage.
module mispredict_detector
  import lp_pkg::*;
#(
  parameter int unsigned P_W = PA_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           dir_valid,     // a skipped-L2 request was looked up
  input  logic [P_W-1:0] dir_pa,
  input  lvl_mask_t      dir_mask,      // its prediction
  input  loc_t           dir_actual,    // where the directory / tags found it
  output logic           act_valid,
  output logic [P_W-1:0] act_pa,
  output dir_action_t    act,
  output logic           release_l3_mshr,
  output logic           mispredict,
  output outcome_t       outcome
);

  dir_action_t a_d;
  outcome_t    o_d;

  always_comb begin
    unique case (dir_actual)
      LOC_L2:  a_d = dir_mask.l2 ? ACT_NONE : ACT_REISSUE_L2;
      LOC_L3:  a_d = (dir_mask.l3 || dir_mask.l2) ? ACT_RESPOND_L3 : ACT_REISSUE_L3;
      default: a_d = ACT_FWD_MEM;
    endcase
    o_d = classify(dir_mask, dir_actual);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_valid       <= 1'b0;
      act             <= ACT_NONE;
      release_l3_mshr <= 1'b0;
      mispredict      <= 1'b0;
      outcome         <= OUT_SEQUENTIAL;
    end else begin
      act_valid       <= dir_valid;
      act             <= a_d;
      release_l3_mshr <= dir_valid && dir_actual == LOC_L2;
      mispredict      <= dir_valid && (a_d == ACT_REISSUE_L2 || a_d == ACT_REISSUE_L3);
      outcome         <= o_d;
    end
  end

  always_ff @(posedge clk) if (dir_valid) act_pa <= dir_pa;

  // A request that reaches this unit has skipped L2 or looks L2 up in
  // parallel; it always names at least one level.
  assert property (@(posedge clk) disable iff (!rst_n) dir_valid |-> (dir_mask != '0));

endmodule
