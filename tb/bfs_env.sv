// End-to-end test environment for the BFS accelerator.
//
// Builds a random directed graph of NV vertices (uniform random out-degree
// 0..2*AVG_DEG, plus vertex 1 as a hub with HUB_DEG out-edges, all to vertices of PE 0,
// so that long neighbour lists are cut into several bursts and the
// dispatcher sees a hot spot), lays out per-PE CSR and CSC
// subgraphs in the memories of NUM_PG pseudo-channel models (each array at
// a random, not beat-aligned word offset), runs the accelerator once per
// mode policy (hybrid, push only, pull only) and compares every vertex's
// level with a software BFS. It counts how often the mechanisms of the
// design happen (push and pull iterations, mode switches, dispatcher back
// pressure, soft-crossbar traffic, two-beat offset reads, bursts cut at a
// 1 KB boundary, duplicate results dropped in P3) and fails if one never
// does. With RMAT_SCALE > 0 the graph is a synthetic RMAT graph instead
// (Kronecker generator with A = 0.57, B = 0.19, C = 0.19, RMAT_EF undirected
// edges per vertex, each stored in both directions; an isolated root is
// replaced by the vertex of highest degree). With FULL = 1 the top is instantiated with its default parameters
// (no parameter list), and NUM_PG, NUM_PE and VERTS_PER_PE must match them.
module bfs_env #(
  parameter int unsigned NUM_PG   = 4,
  parameter int unsigned NUM_PE   = 16,
  parameter int unsigned XBAR_C   = 4,
  parameter int unsigned XBAR_K   = 2,
  parameter int unsigned VPP      = 1024,
  parameter bit          FULL     = 1'b0,
  parameter int unsigned NV       = 2000,
  parameter int unsigned AVG_DEG  = 4,
  parameter int unsigned HUB_DEG  = 700,
  parameter int unsigned WORDS    = 65536,
  parameter int unsigned SEED     = 7,
  parameter int unsigned RMAT_SCALE = 0,   // > 0: RMAT graph of 2**RMAT_SCALE vertices instead
  parameter int unsigned RMAT_EF    = 16,  // RMAT edge factor (undirected edges per vertex)
  parameter longint unsigned MAX_CYCLES = 3000000
);
  import scalabfs_pkg::*;

  localparam int unsigned PPG = NUM_PE / NUM_PG;
  localparam int unsigned DW  = 2 * PPG * 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------------------------------------------------------- DUT
  logic          start = 1'b0;
  vid_t          root = '0, num_vertices = '0;
  policy_e       policy = POLICY_HYBRID;
  logic [4:0]    pull_shift = 5'd3;
  sg_base_t      sg_base [NUM_PE];
  logic          busy, done, overflow;
  level_t        bfs_level;
  logic [15:0]   push_iters, pull_iters;
  logic          lv_rd_valid = 1'b0;
  vid_t          lv_rd_vid = '0;
  logic          lv_rsp_valid;
  level_t        lv_rsp_level;
  logic [NUM_PG-1:0] ar_valid, ar_ready, ar_id, r_valid, r_ready, r_id, r_last;
  addr_t         ar_addr [NUM_PG];
  logic [7:0]    ar_len  [NUM_PG];
  logic [DW-1:0] r_data  [NUM_PG];

  if (FULL) begin : g_dut
    scalabfs_top dut (
      .clk, .rst_n, .start, .root, .num_vertices, .policy, .pull_shift, .sg_base,
      .busy, .done, .overflow, .bfs_level, .push_iters, .pull_iters,
      .lv_rd_valid, .lv_rd_vid, .lv_rsp_valid, .lv_rsp_level,
      .m_ar_valid(ar_valid), .m_ar_ready(ar_ready), .m_ar_addr(ar_addr), .m_ar_len(ar_len),
      .m_ar_id(ar_id), .m_r_valid(r_valid), .m_r_ready(r_ready), .m_r_data(r_data),
      .m_r_id(r_id), .m_r_last(r_last));
  end else begin : g_dut
    scalabfs_top #(.NUM_PG(NUM_PG), .NUM_PE(NUM_PE), .XBAR_C(XBAR_C), .XBAR_K(XBAR_K),
                   .VERTS_PER_PE(VPP)) dut (
      .clk, .rst_n, .start, .root, .num_vertices, .policy, .pull_shift, .sg_base,
      .busy, .done, .overflow, .bfs_level, .push_iters, .pull_iters,
      .lv_rd_valid, .lv_rd_vid, .lv_rsp_valid, .lv_rsp_level,
      .m_ar_valid(ar_valid), .m_ar_ready(ar_ready), .m_ar_addr(ar_addr), .m_ar_len(ar_len),
      .m_ar_id(ar_id), .m_r_valid(r_valid), .m_r_ready(r_ready), .m_r_data(r_data),
      .m_r_id(r_id), .m_r_last(r_last));
  end

  logic        ld_en = 1'b0;
  logic [31:0] ld_addr = '0;
  logic [31:0] ld_data [NUM_PG];

  for (genvar g = 0; g < NUM_PG; g++) begin : g_hbm
    hbm_pc_model #(.DW(DW), .WORDS(WORDS)) u_m (
      .clk, .rst_n, .ld_en, .ld_addr, .ld_data(ld_data[g]),
      .ar_valid(ar_valid[g]), .ar_ready(ar_ready[g]), .ar_addr(ar_addr[g]), .ar_len(ar_len[g]),
      .ar_id(ar_id[g]), .r_valid(r_valid[g]), .r_ready(r_ready[g]), .r_data(r_data[g]),
      .r_id(r_id[g]), .r_last(r_last[g]));
  end

  // ---------------------------------------------------------------- event counters
  longint unsigned n_dsp_stall = 0, n_sx = 0, n_two_beat = 0, n_cut = 0, n_switch = 0, n_dup = 0;
  logic started = 1'b0;
  mode_e mode_prev = MODE_PUSH;
  logic [NUM_PE-1:0] dup_now;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_probe
    assign dup_now[p] = g_dut.dut.g_pg[p / PPG].u_pg.g_pe[p % PPG].u_pe.u_p3.s1_valid &&
                        !g_dut.dut.g_pg[p / PPG].u_pg.g_pe[p % PPG].u_pe.u_p3.set_en;
  end

  always @(posedge clk) if (rst_n) begin
    n_dsp_stall += $countones(g_dut.dut.dsp_i_valid & ~g_dut.dut.dsp_i_ready) != 0;
    n_sx        += $countones(g_dut.dut.sx_i_valid & g_dut.dut.sx_i_ready);
    n_dup       += $countones(dup_now);
    for (int g = 0; g < NUM_PG; g++) if (ar_valid[g] && ar_ready[g]) begin
      if (!ar_id[g] && ar_len[g] == 8'd1) n_two_beat++;
      if (ar_id[g] && ((longint'(ar_addr[g]) + (longint'(ar_len[g]) + 1) * (DW / 8)) % 1024 == 0)) n_cut++;
    end
    if (g_dut.dut.u_sched.cmd_valid && g_dut.dut.u_sched.cmd == CMD_ITER) begin
      if (started && g_dut.dut.mode != mode_prev) n_switch++;
      started   <= 1'b1;
      mode_prev <= g_dut.dut.mode;
    end
    if (start) started <= 1'b0;
  end

  // ---------------------------------------------------------------- graph
  int unsigned src[$], dst[$];
  int unsigned out_deg[], in_deg[], out_off[], in_off[], out_e[], in_e[];
  int unsigned img [NUM_PG][$];
  int          ref_lvl[];
  longint unsigned reached_edges;

  task automatic build_graph();
    int unsigned e = 0;
    void'($urandom(SEED));
    if (RMAT_SCALE > 0) begin
      // Kronecker generator, A = 0.57, B = 0.19, C = 0.19 (D = 0.05); each
      // undirected edge becomes two directed ones, self loops are dropped;
      // vertex IDs are scrambled by a random permutation, as the Graph 500
      // generator does
      int unsigned perm[];
      perm = new[NV];
      foreach (perm[v]) perm[v] = v;
      for (int unsigned v = NV - 1; v > 0; v--) begin
        int unsigned j = $urandom_range(v), t = perm[v];
        perm[v] = perm[j]; perm[j] = t;
      end
      for (int unsigned i = 0; i < NV * RMAT_EF; i++) begin
        int unsigned a = 0, b = 0;
        for (int unsigned l = 0; l < RMAT_SCALE; l++) begin
          int unsigned r = $urandom_range(99);
          a = a * 2 + ((r >= 76) ? 1 : 0);
          b = b * 2 + ((r >= 57 && r < 76) || r >= 95 ? 1 : 0);
        end
        a = perm[a]; b = perm[b];
        if (a != b) begin
          src.push_back(a); dst.push_back(b);
          src.push_back(b); dst.push_back(a);
        end
      end
    end else
    for (int unsigned v = 0; v < NV; v++) begin
      int unsigned d = (v == 1) ? HUB_DEG : $urandom_range(2 * AVG_DEG);
      for (int unsigned k = 0; k < d; k++) begin
        src.push_back(v);
        // the hub points only at vertices of PE 0, a hot spot for the dispatcher
        dst.push_back((v == 1) ? (k * NUM_PE) % NV : $urandom_range(NV - 1));
      end
    end
    out_deg = new[NV]; in_deg = new[NV]; out_off = new[NV + 1]; in_off = new[NV + 1];
    foreach (out_deg[v]) begin out_deg[v] = 0; in_deg[v] = 0; end
    foreach (src[i]) begin out_deg[src[i]]++; in_deg[dst[i]]++; end
    out_off[0] = 0; in_off[0] = 0;
    for (int unsigned v = 0; v < NV; v++) begin
      out_off[v + 1] = out_off[v] + out_deg[v];
      in_off[v + 1]  = in_off[v] + in_deg[v];
    end
    out_e = new[src.size()]; in_e = new[src.size()];
    begin
      int unsigned fo[], fi[];
      fo = new[NV]; fi = new[NV];
      for (int unsigned v = 0; v < NV; v++) begin fo[v] = out_off[v]; fi[v] = in_off[v]; end
      foreach (src[i]) begin
        out_e[fo[src[i]]++] = dst[i];
        in_e[fi[dst[i]]++]  = src[i];
      end
    end
    e = src.size();
    $display("graph: %0d vertices, %0d edges", NV, e);
  endtask

  // one offset array + edge array of PE p into its PC image; returns byte bases
  task automatic put_sub(input int unsigned p, input bit csc, output addr_t off_b, output addr_t edge_b);
    int unsigned g = p / PPG;
    int unsigned acc = 0;
    repeat ($urandom_range(5)) img[g].push_back(32'hDEAD_BEEF);
    off_b = addr_t'((longint'(g) << 28) + img[g].size() * 4);
    for (int unsigned v = p; v < NV; v += NUM_PE) begin
      img[g].push_back(acc);
      acc += csc ? in_deg[v] : out_deg[v];
    end
    img[g].push_back(acc);
    repeat ($urandom_range(5)) img[g].push_back(32'hDEAD_BEEF);
    edge_b = addr_t'((longint'(g) << 28) + img[g].size() * 4);
    for (int unsigned v = p; v < NV; v += NUM_PE) begin
      if (csc) for (int unsigned k = in_off[v];  k < in_off[v + 1];  k++) img[g].push_back(in_e[k]);
      else     for (int unsigned k = out_off[v]; k < out_off[v + 1]; k++) img[g].push_back(out_e[k]);
    end
  endtask

  task automatic ref_bfs(input int unsigned r);
    int unsigned q[$];
    ref_lvl = new[NV];
    foreach (ref_lvl[v]) ref_lvl[v] = 255;
    ref_lvl[r] = 0;
    q.push_back(r);
    reached_edges = 0;
    while (q.size() > 0) begin
      int unsigned u = q.pop_front();
      reached_edges += out_deg[u];
      for (int unsigned k = out_off[u]; k < out_off[u + 1]; k++)
        if (ref_lvl[out_e[k]] == 255) begin
          ref_lvl[out_e[k]] = ref_lvl[u] + 1;
          q.push_back(out_e[k]);
        end
    end
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input policy_e pol, input int unsigned r0);
    longint unsigned t0, cyc;
    int bad = 0;
    int unsigned r = r0;
    if (RMAT_SCALE > 0 && out_deg[r] == 0)
      for (int unsigned v = 0; v < NV; v++) if (out_deg[v] > out_deg[r]) r = v;
    ref_bfs(r);
    @(posedge clk);
    policy <= pol; root <= r; num_vertices <= NV; start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = cycle;
    @(posedge clk);
    check(done === 1'b0 && busy === 1'b1, "start accepted");
    wait (done === 1'b1);
    cyc = cycle - t0;
    @(posedge clk);
    check(!overflow, "no level overflow");
    $display("policy %0d root %0d: %0d cycles, %0d push + %0d pull iterations, %0d edges reached, %f edges/cycle",
             pol, r, cyc, push_iters, pull_iters, reached_edges, real'(reached_edges) / real'(cyc));
    if (pol == POLICY_PUSH) check(pull_iters == 0, "push policy uses no pull iteration");
    if (pol == POLICY_PULL) check(push_iters == 0, "pull policy uses no push iteration");
    for (int unsigned v = 0; v < NV; v++) begin
      lv_rd_valid <= 1'b1; lv_rd_vid <= v;
      @(posedge clk);
      lv_rd_valid <= 1'b0;
      wait (lv_rsp_valid === 1'b1);
      @(negedge clk);
      checks++;
      if (int'(lv_rsp_level) != ref_lvl[v]) begin
        bad++;
        failures++;
        if (bad < 10) $display("FAIL: policy %0d vertex %0d level %0d expected %0d", pol, v, lv_rsp_level, ref_lvl[v]);
      end
      @(posedge clk);
    end
  endtask

  initial begin
    int unsigned maxlen = 0;
    foreach (ld_data[g]) ld_data[g] = '0;
    if (NV > NUM_PE * VPP) $fatal(1, "graph too large for the configuration");
    build_graph();
    for (int unsigned p = 0; p < NUM_PE; p++) begin
      put_sub(p, 1'b0, sg_base[p].csr_off, sg_base[p].csr_edge);
      put_sub(p, 1'b1, sg_base[p].csc_off, sg_base[p].csc_edge);
    end
    for (int g = 0; g < NUM_PG; g++) begin
      if (img[g].size() > WORDS) $fatal(1, "pseudo-channel image too large");
      if (img[g].size() > maxlen) maxlen = img[g].size();
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int unsigned i = 0; i < maxlen; i++) begin
      ld_en <= 1'b1; ld_addr <= i;
      for (int g = 0; g < NUM_PG; g++) ld_data[g] <= (i < img[g].size()) ? img[g][i] : 32'd0;
      @(posedge clk);
    end
    ld_en <= 1'b0;
    @(posedge clk);

    run(POLICY_HYBRID, 1);
    run(POLICY_PUSH, 0);
    run(POLICY_PULL, 3);
    run(POLICY_HYBRID, NV - 1);

    $display("events: dispatcher stalls %0d, soft-crossbar vertices %0d, two-beat offset reads %0d, bursts cut at 1KB %0d, mode switches %0d, P3 duplicates %0d",
             n_dsp_stall, n_sx, n_two_beat, n_cut, n_switch, n_dup);
    check(n_dsp_stall > 0, "dispatcher back pressure happened");
    check(n_sx > 0,        "soft crossbar used");
    check(n_two_beat > 0,  "two-beat offset read happened");
    check(n_cut > 0,       "burst cut at a 1 KB boundary happened");
    check(n_switch > 0,    "push/pull mode switch happened");
    check(n_dup > 0,       "duplicate result dropped in P3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * MAX_CYCLES);
    failures++;
    $display("watchdog expired at cycle %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
