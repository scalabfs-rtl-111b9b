// Self-checking test of one PE (Q = 1, so it owns every vertex; 1024-vertex
// bitmaps). The testbench plays the scheduler, the HBM reader, the vertex
// dispatcher and the soft crossbar: a request for vertex u returns
// {vid: w, aux: u} for every out-neighbour w (push) or in-neighbour w
// (pull) of u, through a queue with random gaps; pull-mode output on
// sx_out is looped back to sx_in after a random delay. Each iteration uses
// a random mode. Checked against a reference BFS: the vertices P1 asks for
// in each iteration (exactly the frontier in push mode, exactly the
// unvisited vertices in pull mode), the new-vertex count of
// every level, the number of levels, and the level of every vertex read
// out after the run (LEVEL_INF for unreached vertices). Two runs from
// different roots check that CMD_INIT clears the previous run.
module tb_pe;
  import scalabfs_pkg::*;
  localparam int NV = 1000, VPP = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0;
  cmd_e cmd = CMD_NONE;
  mode_e mode = MODE_PUSH;
  level_t bfs_level = '0;
  vid_t num_vertices = NV, root = '0;
  logic ready, pipe_busy, req_valid, req_ready, d_valid, d_ready;
  logic sx_out_valid, sx_out_ready, sx_in_valid, lv_rd_valid, lv_rsp_valid;
  vid_t new_count, req_vid, sx_out_vid, sx_in_vid;
  vmsg_t d_msg;
  logic [9:0] lv_rd_local;
  level_t lv_rsp_level;
  logic pe_id = 1'b0;

  pe #(.Q(1), .VERTS_PER_PE(VPP)) dut (.*);

  int out_adj [NV][$];
  int in_adj [NV][$];
  int ref_lvl [NV];
  vmsg_t dq[$];
  vid_t sq[$];
  int sq_t[$];
  int now = 0;
  int n_req = 0;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  // reader / dispatcher / soft crossbar models
  always @(posedge clk) now++;
  assign d_valid = (dq.size() > 0) && rst_n;
  assign d_msg   = (dq.size() > 0) ? dq[0] : '0;
  assign sx_in_valid = (sq.size() > 0) && (sq_t[0] <= now);
  assign sx_in_vid   = (sq.size() > 0) ? sq[0] : '0;
  always @(posedge clk) if (rst_n) begin
    if (d_valid && d_ready) void'(dq.pop_front());
    if (sx_in_valid) begin void'(sq.pop_front()); void'(sq_t.pop_front()); end
    if (sx_out_valid && sx_out_ready) begin
      sq.push_back(sx_out_vid);
      sq_t.push_back(now + $urandom_range(1, 6));
    end
    if (req_valid && req_ready) begin
      int u;
      n_req++;
      u = int'(req_vid);
      if (mode == MODE_PUSH) foreach (out_adj[u][k]) dq.push_back('{vid: out_adj[u][k], aux: u});
      else                   foreach (in_adj[u][k])  dq.push_back('{vid: in_adj[u][k], aux: u});
    end
  end
  always @(negedge clk) begin
    req_ready    = ($urandom_range(99) < 70);
    sx_out_ready = ($urandom_range(99) < 80);
  end

  task automatic command(cmd_e c);
    @(negedge clk);
    while (!ready) @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NONE;
    @(negedge clk);
    while (!ready) @(negedge clk);
  endtask

  task automatic bfs_run(int r);
    int q[$];
    int lvl, quiet, nswitch = 0;
    mode_e prev;
    foreach (ref_lvl[v]) ref_lvl[v] = -1;
    ref_lvl[r] = 0; q.push_back(r);
    while (q.size() > 0) begin
      int u;
      u = q.pop_front();
      foreach (out_adj[u][k]) if (ref_lvl[out_adj[u][k]] < 0) begin
        ref_lvl[out_adj[u][k]] = ref_lvl[u] + 1; q.push_back(out_adj[u][k]);
      end
    end
    root = r;
    command(CMD_INIT);
    lvl = 0;
    prev = MODE_PUSH;
    forever begin
      int expect_n = 0, expect_req = 0;
      foreach (ref_lvl[v]) if (ref_lvl[v] == lvl + 1) expect_n++;
      mode = ($urandom_range(1)) ? MODE_PULL : MODE_PUSH;
      if (lvl > 0 && mode != prev) nswitch++;
      prev = mode;
      bfs_level = level_t'(lvl);
      // P1 asks for the frontier (push) or the unvisited vertices (pull)
      foreach (ref_lvl[v])
        if (mode == MODE_PUSH ? (ref_lvl[v] == lvl) : (ref_lvl[v] < 0 || ref_lvl[v] > lvl)) expect_req++;
      n_req = 0;
      command(CMD_ITER);
      quiet = 0;
      while (quiet < 3) begin
        @(negedge clk);
        quiet = (ready && !pipe_busy && dq.size() == 0 && sq.size() == 0) ? quiet + 1 : 0;
      end
      chk(new_count == vid_t'(expect_n), "new vertices of the level");
      chk(n_req == expect_req, "P1 requests exactly the vertices of the mode");
      command(CMD_SWAP);
      if (new_count == 0 || lvl > 100) break;
      lvl++;
    end
    for (int v = 0; v < VPP; v++) begin
      @(negedge clk);
      lv_rd_valid = 1; lv_rd_local = 10'(v);
      @(negedge clk);
      lv_rd_valid = 0;
      @(negedge clk);
      chk(lv_rsp_valid, "level response after two cycles");
      if (v < NV) chk(lv_rsp_level == ((ref_lvl[v] < 0) ? LEVEL_INF : level_t'(ref_lvl[v])), "vertex level");
      else        chk(lv_rsp_level == LEVEL_INF, "unused vertex not visited");
    end
    chk(nswitch > 0, "mode switched during the run");
    $display("root %0d: %0d levels, %0d mode switches", r, lvl, nswitch);
  endtask

  initial begin
    lv_rd_valid = 0; lv_rd_local = '0;
    for (int v = 0; v < NV; v++)
      repeat ($urandom_range(0, 5)) begin
        int w;
        w = $urandom_range(NV - 1);
        out_adj[v].push_back(w); in_adj[w].push_back(v);
      end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    bfs_run(0);
    bfs_run(17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
