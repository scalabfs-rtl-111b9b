// P3, result writing stage of a PE.
//
// Each incoming vertex (one per cycle, always accepted) belongs to this PE
// and has been found to join the next frontier. The stage first reads its
// bit in the next frontier; one cycle later, if the bit is still 0, it sets
// the bit in the next frontier and in the visited map and writes
// `wr_level` (bfs_level + 1) into the level array. A vertex that is already
// in the next frontier is dropped, so `new_count` counts each newly
// activated vertex once; the count is what the scheduler uses to choose the
// mode of the next iteration. The read that is issued in the same cycle as
// a write to the same vertex sees the old bit, so the last written vertex is
// remembered and matched (forwarding). Reading the next frontier first uses
// the second operation of the double-pumped bitmap and is this design's
// choice; the paper gives the writes.
module pe_write
  import scalabfs_pkg::*;
#(
  parameter int unsigned Q          = 64,
  parameter int unsigned DEPTH_BITS = 131072,
  localparam int unsigned WORDS = DEPTH_BITS / BM_W,
  localparam int unsigned WAW   = $clog2(WORDS),
  localparam int unsigned BAW   = $clog2(DEPTH_BITS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr_count,
  input  level_t          wr_level,
  input  logic            in_valid,
  input  vid_t            in_vid,
  // next frontier read
  output logic            nf_rd_en,
  output logic [WAW-1:0]  nf_rd_addr,
  input  logic [BM_W-1:0] nf_rd_word,
  // bit writes to next frontier and visited map, level write
  output logic            set_en,
  output logic [BAW-1:0]  set_addr,
  output level_t          set_level,
  output vid_t            new_count,
  output logic            busy
);
  logic           s1_valid;
  logic [BAW-1:0] s1_local;
  logic           last_valid;
  logic [BAW-1:0] last_local;
  logic [BAW-1:0] in_local;
  logic           already;

  assign in_local   = BAW'(in_vid / Q);
  assign nf_rd_en   = in_valid;
  assign nf_rd_addr = in_local[BAW-1:$clog2(BM_W)];
  assign already    = nf_rd_word[s1_local[$clog2(BM_W)-1:0]] ||
                      (last_valid && last_local == s1_local);
  assign set_en     = s1_valid && !already;
  assign set_addr   = s1_local;
  assign set_level  = wr_level;
  assign busy       = s1_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      s1_local   <= '0;
      last_valid <= 1'b0;
      last_local <= '0;
      new_count  <= '0;
    end else begin
      s1_valid   <= in_valid;
      s1_local   <= in_local;
      last_valid <= set_en;
      last_local <= s1_local;
      if (clr_count)   new_count <= '0;
      else if (set_en) new_count <= new_count + 1'b1;
    end
  end
endmodule
