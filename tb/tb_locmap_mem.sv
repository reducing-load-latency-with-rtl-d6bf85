// tb_locmap_mem: behavioural model of the memory that holds the LocMap
// table, for testbenches only (the real part is the DRAM behind the memory
// controller and cache hierarchy). Line reads are accepted one at a time and
// answered LAT cycles later; write-backs are accepted with a fixed pattern of
// back-pressure. A line never written reads as the initial LocMap, whose code
// for slot s of line l is (7*l + 3*s) mod 3 when PATTERN is set (so every
// level appears) and 0 (memory) otherwise.
module tb_locmap_mem
  import lp_pkg::*;
#(
  parameter int unsigned LA_W    = LINE_ADDR_W,
  parameter int unsigned LAT     = 8,
  parameter bit          PATTERN = 1'b1
) (
  input  logic                 clk,
  input  logic                 rd_valid,
  output logic                 rd_ready,
  input  logic [LA_W-1:0]      rd_line,
  output logic                 rd_resp_valid,
  output logic [LINE_BITS-1:0] rd_resp_data,
  input  logic                 wr_valid,
  output logic                 wr_ready,
  input  logic [LA_W-1:0]      wr_line,
  input  logic [LINE_BITS-1:0] wr_data,
  output int                   n_reads,
  output int                   n_writes
);

  logic [LINE_BITS-1:0] store [logic [LA_W-1:0]];
  int timer = -1;
  int cyc = 0;
  logic [LA_W-1:0] addr_q = '0;

  function automatic logic [LINE_BITS-1:0] initial_line(logic [LA_W-1:0] l);
    logic [LINE_BITS-1:0] d;
    d = '0;
    if (PATTERN)
      for (int s = 0; s < SLOTS; s++) d[2*s +: 2] = 2'((7 * longint'(l) + 3 * s) % 3);
    return d;
  endfunction

  initial begin n_reads = 0; n_writes = 0; end

  assign rd_ready      = (timer < 0);
  assign rd_resp_valid = (timer == 0);
  assign rd_resp_data  = store.exists(addr_q) ? store[addr_q] : initial_line(addr_q);
  assign wr_ready      = (cyc % 3 != 1);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rd_valid && rd_ready) begin
      timer <= int'(LAT);
      addr_q <= rd_line;
      n_reads <= n_reads + 1;
    end else if (timer >= 0) timer <= timer - 1;
    if (wr_valid && wr_ready) begin
      store[wr_line] = wr_data;
      n_writes <= n_writes + 1;
    end
  end
endmodule
