// tb_locmap_addr_gen: checks the LocMap address mapping against integer
// arithmetic: LocMap line = base + PA / 16384, slot = (PA / 64) mod 256,
// for fixed corner cases and random addresses. No clock is needed by the
// unit; a time step separates the cases, and a watchdog bounds the run.
module tb_locmap_addr_gen;
  import lp_pkg::*;

  localparam int unsigned LA_W = PA_W - OFFSET_W;

  logic [LA_W-1:0]   base_line;
  logic [PA_W-1:0]   pa;
  logic [LA_W-1:0]   lm_line;
  logic [SLOT_W-1:0] slot;
  int checks = 0, failures = 0;

  locmap_addr_gen dut (.base_line, .pa, .lm_line, .slot);

  task automatic check(longint unsigned b, longint unsigned a);
    longint unsigned exp_line, exp_slot;
    base_line = LA_W'(b);
    pa        = PA_W'(a);
    #1;
    exp_line = (b + a / 64'd16384) % (64'd1 << LA_W);
    exp_slot = (a / 64'd64) % 64'd256;
    checks++;
    if (longint'(lm_line) != exp_line || longint'(slot) != exp_slot) begin
      failures++;
      $display("FAIL base=%0h pa=%0h line=%0h/%0h slot=%0d/%0d",
               b, a, lm_line, exp_line, slot, exp_slot);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0);
    check(0, 64);             // next block: slot 1, same LocMap line
    check(0, 16383);          // last byte of the first 16 KiB
    check(0, 16384);          // first block of the second LocMap line
    check(28'h3F0_0000, 34'h3_FFFF_FFC0);
    check(28'hFFF_FFFF, 34'h0_0000_4000);   // base wraps
    for (int i = 0; i < 2000; i++)
      check({$urandom, $urandom} % (64'd1 << LA_W), {$urandom, $urandom} % (64'd1 << PA_W));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
