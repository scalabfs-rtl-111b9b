// Scheduler: runs the level-synchronous BFS over all PEs.
//
// After `start` it sends CMD_INIT (clear bitmaps, mark the root), then one
// iteration after another: CMD_ITER with the mode and bfs_level of the
// iteration, wait until the iteration is over, CMD_SWAP, decide. An
// iteration is over when every PE is ready (its P1 scan has ended) and
// nothing is left anywhere in the datapath (`datapath_busy` low: no request
// in an HBM reader, no read in flight, no vertex in a crossbar FIFO or in a
// P2/P3 stage) for two cycles in a row.
//
// The number of vertices reached in the iteration (`new_total`, summed over
// all PEs) decides what follows: 0 ends the run, otherwise the level goes
// up by one and the next mode is chosen. The paper says only that push mode
// serves the beginning and ending iterations and pull mode the middle ones;
// this design's rule is pull while the new frontier holds more than
// num_vertices >> pull_shift vertices, push otherwise. `policy` can force
// push-only or pull-only runs. A run also stops, with `overflow`, if the
// level would reach LEVEL_INF. Counters report the iterations done in each
// mode.
module scheduler
  import scalabfs_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  policy_e   policy,
  input  logic [4:0] pull_shift,
  input  vid_t      num_vertices,
  input  logic      all_ready,
  input  logic      datapath_busy,
  input  vid_t      new_total,
  output logic      cmd_valid,
  output cmd_e      cmd,
  output mode_e     mode,
  output level_t    bfs_level,
  output logic      busy,
  output logic      done,
  output logic      overflow,
  output logic [15:0] push_iters,
  output logic [15:0] pull_iters
);
  typedef enum logic [2:0] {S_IDLE, S_INIT, S_W_INIT, S_ITER, S_W_ITER, S_SWAP, S_W_SWAP} state_e;
  state_e state;
  logic   quiet_q;
  vid_t   total_q;

  wire quiet = all_ready && !datapath_busy;

  function automatic mode_e choose(input vid_t frontier);
    unique case (policy)
      POLICY_PUSH: return MODE_PUSH;
      POLICY_PULL: return MODE_PULL;
      default:     return (frontier > (num_vertices >> pull_shift)) ? MODE_PULL : MODE_PUSH;
    endcase
  endfunction

  assign busy = (state != S_IDLE);

  always_comb begin
    cmd_valid = 1'b0;
    cmd       = CMD_NONE;
    unique case (state)
      S_INIT: begin cmd_valid = 1'b1; cmd = CMD_INIT; end
      S_ITER: begin cmd_valid = 1'b1; cmd = CMD_ITER; end
      S_SWAP: begin cmd_valid = 1'b1; cmd = CMD_SWAP; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      mode       <= MODE_PUSH;
      bfs_level  <= '0;
      done       <= 1'b0;
      overflow   <= 1'b0;
      quiet_q    <= 1'b0;
      total_q    <= '0;
      push_iters <= '0;
      pull_iters <= '0;
    end else begin
      quiet_q <= quiet && (state == S_W_ITER);
      unique case (state)
        S_IDLE: if (start) begin
          done       <= 1'b0;
          overflow   <= 1'b0;
          bfs_level  <= '0;
          push_iters <= '0;
          pull_iters <= '0;
          // the frontier of level 0 is the root alone
          mode       <= choose(vid_t'(1));
          state      <= S_INIT;
        end
        S_INIT:   state <= S_W_INIT;
        S_W_INIT: if (all_ready) state <= S_ITER;
        S_ITER: begin
          if (mode == MODE_PUSH) push_iters <= push_iters + 1'b1;
          else                   pull_iters <= pull_iters + 1'b1;
          state <= S_W_ITER;
        end
        S_W_ITER: if (quiet && quiet_q) begin
          total_q <= new_total;
          state   <= S_SWAP;
        end
        S_SWAP: state <= S_W_SWAP;
        S_W_SWAP: if (all_ready) begin
          if (total_q == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else if ({1'b0, bfs_level} + 9'd2 >= {1'b0, LEVEL_INF}) begin
            done     <= 1'b1;
            overflow <= 1'b1;
            state    <= S_IDLE;
          end else begin
            bfs_level <= bfs_level + 1'b1;
            mode      <= choose(total_q);
            state     <= S_ITER;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
