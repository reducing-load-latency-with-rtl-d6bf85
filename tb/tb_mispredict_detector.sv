// tb_mispredict_detector: checks the directory-side decision for every
// prediction mask and every actual location, one cycle after the request,
// against expectations written out per case: the three worked examples of
// the one-way correct, one-way wrong and multi-way cases first, then the
// full cross product in random order with back-to-back requests. Requests
// that are not valid must not produce a decision.
module tb_mispredict_detector;
  import lp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic dir_valid = 0; logic [PA_W-1:0] dir_pa = 0;
  lvl_mask_t dir_mask = '{mem: 1'b0, l3: 1'b1, l2: 1'b0};
  loc_t dir_actual = LOC_L3;
  logic act_valid; logic [PA_W-1:0] act_pa; dir_action_t act;
  logic release_l3_mshr, mispredict; outcome_t outcome;
  int checks = 0, failures = 0;

  mispredict_detector dut (.*);
  always #5 clk = ~clk;

  // expected decision, written as a table over (L2 in mask, LLC in mask,
  // memory in mask, actual location)
  task automatic expect_for(lvl_mask_t m, loc_t a, output dir_action_t ea,
                            output outcome_t eo, output logic emis, output logic erel);
    // nearest predicted level: 0 = L2, 1 = LLC, 2 = memory
    int near, where;
    near  = m.l2 ? 0 : m.l3 ? 1 : 2;
    where = (a == LOC_L2) ? 0 : (a == LOC_L3) ? 1 : 2;
    case (where)
      0: ea = m.l2 ? ACT_NONE : ACT_REISSUE_L2;
      1: ea = (m.l2 || m.l3) ? ACT_RESPOND_L3 : ACT_REISSUE_L3;
      default: ea = ACT_FWD_MEM;
    endcase
    if (near > where)      eo = OUT_HARMFUL;
    else if (near < where) eo = OUT_OPP_LOSS;
    else if (where == 0)   eo = OUT_SEQUENTIAL;
    else                   eo = OUT_SKIP;
    emis = (eo == OUT_HARMFUL);
    erel = (where == 0);
  endtask

  task automatic one(lvl_mask_t m, loc_t a, logic [PA_W-1:0] pa);
    dir_action_t ea; outcome_t eo; logic emis, erel;
    expect_for(m, a, ea, eo, emis, erel);
    @(negedge clk); dir_valid = 1; dir_mask = m; dir_actual = a; dir_pa = pa;
    @(posedge clk); #1;
    dir_valid = 0;
    checks++;
    if (!act_valid || act != ea || outcome != eo || mispredict != emis ||
        release_l3_mshr != erel || act_pa != pa) begin
      failures++;
      $display("FAIL mask=%b actual=%0d: act=%0d/%0d out=%0d/%0d mis=%0d/%0d rel=%0d/%0d",
               m, a, act, ea, outcome, eo, mispredict, emis, release_l3_mshr, erel);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // (a) predicted LLC, block in LLC: LLC answers, a correct skip
    one('{mem: 1'b0, l3: 1'b1, l2: 1'b0}, LOC_L3, 34'h1000);
    checks++; if (act != ACT_RESPOND_L3 || outcome != OUT_SKIP || mispredict) failures++;
    // (b) predicted LLC, block in L2: recovery to L2, LLC MSHR released
    one('{mem: 1'b0, l3: 1'b1, l2: 1'b0}, LOC_L2, 34'h2040);
    checks++; if (act != ACT_REISSUE_L2 || !mispredict || !release_l3_mshr || outcome != OUT_HARMFUL) failures++;
    // (c) predicted LLC and memory, block in memory: forwarded to memory
    one('{mem: 1'b1, l3: 1'b1, l2: 1'b0}, LOC_MEM, 34'h3080);
    checks++; if (act != ACT_FWD_MEM || mispredict || outcome != OUT_OPP_LOSS) failures++;
    // memory-only prediction, block cached in the LLC: recovery from the LLC
    one('{mem: 1'b1, l3: 1'b0, l2: 1'b0}, LOC_L3, 34'h40C0);
    checks++; if (act != ACT_REISSUE_L3 || !mispredict) failures++;
    // full cross product, random order, several rounds
    for (int r = 0; r < 200; r++) begin
      lvl_mask_t m;
      loc_t a;
      m = lvl_mask_t'(3'(1 + $urandom % 7));
      a = loc_t'($urandom % 3);
      one(m, a, {$urandom, $urandom});
    end
    // idle cycle: no decision
    @(negedge clk); @(posedge clk); #1;
    checks++; if (act_valid) begin failures++; $display("FAIL decision without request"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
