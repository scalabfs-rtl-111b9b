// One vertex bitmap of a PE (current frontier, next frontier or visited map).
//
// The bitmaps sit in double-pumped block RAM so that two operations can be
// done on one bitmap in every PE clock cycle. This model gives those two
// operations as two ports in the PE clock domain:
//   port A reads a whole BM_W-bit word (ra_word is valid the cycle after
//          ra_en, read-first when port B writes the same word);
//   port B either sets/clears a single bit (wb_bit_en) or writes a whole
//          word (wb_word_en, used to clear the bitmap).
// Word read and single-bit write match a BRAM used with asymmetric port
// widths. Contents are not reset; the PE clears them by a sweep.
// The published design keeps the three bitmaps in double-pumped block RAM
// (two operations per cycle); modelling that as one read and one write port
// at the PE clock is this design's choice.
module bitmap_ram
  import scalabfs_pkg::*;
#(
  parameter int unsigned DEPTH_BITS = 131072,
  localparam int unsigned WORDS = DEPTH_BITS / BM_W,
  localparam int unsigned WAW   = $clog2(WORDS),
  localparam int unsigned BAW   = $clog2(DEPTH_BITS)
) (
  input  logic             clk,
  // port A: word read
  input  logic             ra_en,
  input  logic [WAW-1:0]   ra_addr,
  output logic [BM_W-1:0]  ra_word,
  // port B: bit write or word write (word write wins if both)
  input  logic             wb_bit_en,
  input  logic [BAW-1:0]   wb_bit_addr,
  input  logic             wb_bit_val,
  input  logic             wb_word_en,
  input  logic [WAW-1:0]   wb_word_addr,
  input  logic [BM_W-1:0]  wb_word_data
);
  logic [BM_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (ra_en) ra_word <= mem[ra_addr];
  end

  always_ff @(posedge clk) begin
    if (wb_word_en)
      mem[wb_word_addr] <= wb_word_data;
    else if (wb_bit_en)
      mem[wb_bit_addr[BAW-1:$clog2(BM_W)]][wb_bit_addr[$clog2(BM_W)-1:0]] <= wb_bit_val;
  end
endmodule
