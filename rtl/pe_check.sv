// P2, neighbour checking stage of a PE.
//
// Takes vertex messages from the vertex dispatcher; msg.vid always belongs
// to this PE (vid % Q == pe_id). The stage reads the bit of msg.vid from one
// bitmap of the PE:
//   push: the visited map. A child that is not yet visited goes on to P3
//         (out_vid = msg.vid); a visited one is dropped.
//   pull: the current frontier. If the parent msg.vid is active, its child
//         msg.aux (the unvisited vertex whose incoming list was read) is sent
//         on through the soft crossbar (out_vid = msg.aux); else dropped.
// Timing: the bitmap answers one cycle after the read, so the stage holds
// one message (s1); while that message waits for `out_ready` its read is
// issued again each cycle. Throughput is one message per cycle.
// What is checked in each mode follows the published design; the message
// format {vid, aux} and the one-stage pipeline are this design's choices.
module pe_check
  import scalabfs_pkg::*;
#(
  parameter int unsigned Q          = 64,
  parameter int unsigned DEPTH_BITS = 131072,
  localparam int unsigned WORDS = DEPTH_BITS / BM_W,
  localparam int unsigned WAW   = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  mode_e           mode,
  input  logic            in_valid,
  output logic            in_ready,
  input  vmsg_t           in_msg,
  output logic            bm_rd_en,
  output logic [WAW-1:0]  bm_rd_addr,
  input  logic [BM_W-1:0] bm_rd_word,
  output logic            out_valid,
  input  logic            out_ready,
  output vid_t            out_vid,
  output logic            busy
);
  logic  s1_valid;
  vmsg_t s1_msg;
  logic  bit_v, pass, s1_adv;
  vid_t  in_local, s1_local;

  assign in_local = in_msg.vid / Q;
  assign s1_local = s1_msg.vid / Q;
  assign bit_v    = bm_rd_word[s1_local[$clog2(BM_W)-1:0]];
  assign pass     = (mode == MODE_PUSH) ? !bit_v : bit_v;
  assign s1_adv   = !s1_valid || !pass || out_ready;

  assign out_valid  = s1_valid && pass;
  assign out_vid    = (mode == MODE_PUSH) ? s1_msg.vid : s1_msg.aux;
  assign in_ready   = s1_adv;
  assign bm_rd_en   = 1'b1;
  assign bm_rd_addr = s1_adv ? WAW'(in_local / BM_W) : WAW'(s1_local / BM_W);
  assign busy       = s1_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_msg   <= '0;
    end else if (s1_adv) begin
      s1_valid <= in_valid;
      s1_msg   <= in_msg;
    end
  end
endmodule
