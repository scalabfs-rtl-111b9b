// P1, workload preparing stage of a PE.
//
// On `start` it scans the PE's bitmap one word per step: in push mode the
// current frontier, looking for active vertices (bit = 1); in pull mode the
// visited map, looking for unvisited vertices (bit = 0). For every such
// vertex it sends the global vertex ID (local index * Q + pe_id) to the HBM
// reader, which fetches its outgoing (CSR, push) or incoming (CSC, pull)
// neighbour list. Only the first `num_local` bits count.
//
// Timing: a word takes one cycle to read and one to load, then one cycle per
// request sent (while req_ready is high). In push mode the word is cleared
// in the same cycle it is read, through the write port of the bitmap, so the
// frontier that becomes the next frontier after the swap is already empty;
// this read-and-clear is a choice of this design. `busy` is high from start
// until the last request has been accepted.
// Scanning the current frontier (push) or the visited map (pull) follows
// the published design; the scan rate is this design's choice.
module pe_prepare
  import scalabfs_pkg::*;
#(
  parameter int unsigned Q          = 64,      // number of PEs
  parameter int unsigned DEPTH_BITS = 131072,  // vertices per PE
  localparam int unsigned WORDS = DEPTH_BITS / BM_W,
  localparam int unsigned WAW   = $clog2(WORDS),
  localparam int unsigned QW    = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  mode_e           mode,
  input  logic [QW-1:0]   pe_id,
  input  vid_t            num_local,
  // bitmap word read (current frontier in push, visited map in pull)
  output logic            bm_rd_en,
  output logic [WAW-1:0]  bm_rd_addr,
  input  logic [BM_W-1:0] bm_rd_word,
  // clear of the current frontier word just read (push mode)
  output logic            bm_clr_en,
  output logic [WAW-1:0]  bm_clr_addr,
  // requests to the HBM reader
  output logic            req_valid,
  input  logic            req_ready,
  output vid_t            req_vid,
  output logic            busy
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_LOAD, S_EMIT} state_e;
  state_e          state;
  mode_e           mode_q;
  logic [WAW:0]    word;      // word being processed
  logic [WAW:0]    n_words;
  logic [BM_W-1:0] pending;
  logic [$clog2(BM_W)-1:0] low;

  // index of the lowest set bit of `pending`
  always_comb begin
    low = '0;
    for (int b = BM_W - 1; b >= 0; b--)
      if (pending[b]) low = $clog2(BM_W)'(b);
  end

  // bits of the word that hold real vertices
  function automatic logic [BM_W-1:0] range_mask(input logic [WAW:0] w, input vid_t n);
    logic [BM_W-1:0] m;
    for (int b = 0; b < BM_W; b++)
      m[b] = (vid_t'(w) * BM_W + vid_t'(b)) < n;
    return m;
  endfunction

  assign bm_rd_en    = (state == S_READ);
  assign bm_rd_addr  = word[WAW-1:0];
  assign bm_clr_en   = (state == S_READ) && (mode_q == MODE_PUSH);
  assign bm_clr_addr = word[WAW-1:0];

  assign req_valid = (state == S_EMIT) && (pending != '0);
  assign req_vid   = ((vid_t'(word) * BM_W + vid_t'(low)) * Q) + vid_t'(pe_id);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      mode_q  <= MODE_PUSH;
      word    <= '0;
      n_words <= '0;
      pending <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          mode_q  <= mode;
          word    <= '0;
          n_words <= (WAW+1)'((num_local + BM_W - 1) / BM_W);
          state   <= (num_local == '0) ? S_IDLE : S_READ;
        end
        S_READ: state <= S_LOAD;
        S_LOAD: begin
          pending <= ((mode_q == MODE_PUSH) ? bm_rd_word : ~bm_rd_word) & range_mask(word, num_local);
          state   <= S_EMIT;
        end
        S_EMIT: begin
          if (pending == '0 || (req_ready && (pending & (pending - 1'b1)) == '0)) begin
            pending <= '0;
            if (word + 1'b1 == n_words) state <= S_IDLE;
            else begin
              word  <= word + 1'b1;
              state <= S_READ;
            end
          end else if (req_ready) begin
            pending[low] <= 1'b0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
