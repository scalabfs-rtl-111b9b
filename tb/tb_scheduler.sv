// Self-checking test of the scheduler. A PE model drops all_ready for a
// random time after every command and holds datapath_busy for a random
// time after each CMD_ITER, with single-cycle quiet gaps that must not end
// the iteration. new_total follows a script per run. Checked: the command
// order INIT, (ITER, SWAP)*; the mode of each iteration under the hybrid,
// push-only and pull-only policies; bfs_level; the SWAP following at most
// three cycles after the datapath goes quiet; done, the iteration counters,
// and the overflow stop at level LEVEL_INF-2.
module tb_scheduler;
  import scalabfs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0;
  policy_e policy = POLICY_HYBRID;
  logic [4:0] pull_shift = 5'd4;
  vid_t num_vertices = 32'd1000;
  logic all_ready = 1, datapath_busy = 0;
  vid_t new_total = '0;
  logic cmd_valid, busy, done, overflow;
  cmd_e cmd;
  mode_e mode;
  level_t bfs_level;
  logic [15:0] push_iters, pull_iters;

  scheduler dut (.*);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  // one BFS run; totals[i] is the frontier size reported after iteration i
  // (a 0 ends the run); a negative length means "never 0" (overflow run)
  task automatic run(policy_e pol, int totals[$], bit expect_ovf);
    int iter = 0, npush = 0, npull = 0;
    vid_t prev = 1;
    policy = pol;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    chk(cmd_valid && cmd == CMD_INIT, "INIT first");
    all_ready = 0;
    repeat ($urandom_range(1, 5)) @(negedge clk);
    all_ready = 1;
    chk(!done, "done cleared by start");
    forever begin
      mode_e want;
      int quiet_at, cyc;
      // wait for the ITER command
      cyc = 0;
      while (!cmd_valid && !done) begin @(negedge clk); cyc++; end
      if (done) break;
      chk(cmd == CMD_ITER, "ITER after INIT/SWAP");
      want = (pol == POLICY_PUSH) ? MODE_PUSH : (pol == POLICY_PULL) ? MODE_PULL :
             (prev > (num_vertices >> pull_shift)) ? MODE_PULL : MODE_PUSH;
      chk(mode == want, "mode choice");
      chk(bfs_level == level_t'(iter), "bfs_level");
      if (mode == MODE_PUSH) npush++; else npull++;
      // busy period with one-cycle quiet glitches
      all_ready = 0; datapath_busy = 1;
      for (int k = 0; k < 30; k++) begin
        @(negedge clk);
        chk(!cmd_valid, "no command while busy");
        if (k == 10) all_ready = 1;
        datapath_busy = (k % 7 != 3);
      end
      all_ready = 1; datapath_busy = 0;
      new_total = vid_t'(iter < totals.size() ? totals[iter] : 7);
      cyc = 0;
      while (!cmd_valid) begin @(negedge clk); cyc++; end
      chk(cmd == CMD_SWAP, "SWAP ends the iteration");
      chk(cyc <= 3, "SWAP within 3 cycles of quiet");
      prev = new_total;
      iter++;
      all_ready = 0;
      repeat ($urandom_range(1, 4)) @(negedge clk);
      all_ready = 1;
      if (iter > 300) break;
    end
    chk(!busy, "idle after done");
    chk(overflow == expect_ovf, "overflow flag");
    chk(push_iters == 16'(npush) && pull_iters == 16'(npull), "iteration counters");
    if (expect_ovf) chk(iter == int'(LEVEL_INF) - 1, "stops before level reaches INF");
    else chk(iter == totals.size(), "stops at empty frontier");
    $display("policy %0d: %0d iterations (%0d push, %0d pull) overflow %0d",
             pol, iter, push_iters, pull_iters, overflow);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // num_vertices >> 4 = 62: push, push, pull, pull, push, push
    run(POLICY_HYBRID, '{10, 100, 500, 62, 3, 0}, 0);
    run(POLICY_PUSH,   '{10, 100, 500, 0}, 0);
    run(POLICY_PULL,   '{1, 0}, 0);
    run(POLICY_HYBRID, '{}, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
