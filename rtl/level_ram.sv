// Level array of one PE, kept in UltraRAM in the original design.
//
// One entry of LEVEL_W bits per vertex of the PE's interval, indexed by the
// local vertex index (VID / number of PEs). One write port, used by the
// result-writing stage, and one read port with one cycle of latency, used to
// read results back. Entries are not cleared: a level is meaningful only for
// a vertex whose visited bit is set, and the PE reports "not reached" for the
// others, which saves a sweep over the array on every run.
// The level array in on-chip UltraRAM follows the published design; the
// 8-bit width and the no-clear scheme are this design's choices.
module level_ram
  import scalabfs_pkg::*;
#(
  parameter int unsigned DEPTH = 131072,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  level_t        wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output level_t        rdata
);
  level_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
