// locmap_addr_gen: maps a block's physical address to its LocMap entry.
//
// The LocMap is a flat table in reserved physical memory holding a 2-bit
// location code for every 64-byte block. One 64-byte LocMap line holds
// 256 codes, so it covers 16 KiB of memory and the LocMap line that holds
// a block is  base + (PA >> 14)  (the paper's one-to-one mapping). Inside
// that line the block's code is slot PA[13:6], i.e. bits
// [2*slot+1 : 2*slot] of the 512-bit line.
//
// Interface: base_line is the LocMap base, set by the operating system,
// given as a 64-byte line address (byte address >> 6) so that adding the
// shifted physical address yields the line address the metadata cache and
// memory use. This unit choice is this design's own: the paper writes the
// formula without units. Purely combinational; no clock.
module locmap_addr_gen
  import lp_pkg::*;
#(
  parameter int unsigned P_W  = PA_W,         // physical address width
  parameter int unsigned LA_W = P_W - OFFSET_W // line address width
) (
  input  logic [LA_W-1:0]   base_line,  // LocMap base, in 64-byte lines
  input  logic [P_W-1:0]    pa,         // physical byte address of the block
  output logic [LA_W-1:0]   lm_line,    // line address of the LocMap line
  output logic [SLOT_W-1:0] slot        // 2-bit field index inside the line
);

  always_comb begin
    lm_line = base_line + LA_W'(pa >> LM_SHIFT);
    slot    = pa[LM_SHIFT-1:OFFSET_W];
  end

endmodule
