// Self-checking test of hbm_reader: two PEs per group, Q = 4, 128-bit beats,
// against the behavioural pseudo-channel model. Each PE port gets its own
// CSR and CSC subgraph (64 local vertices, random degrees 0..40, one hub of
// 700 neighbours, unaligned array starts). Random request gaps and random
// output stalls. Checked: every read obeys the AXI rules of the design
// (offset reads ID 0 and 1-2 beats, edge bursts ID 1, at most 64 beats, no
// 1 KB crossing); the multiset of {neighbour, requester} messages over both
// ports equals the expected one for push (CSR) and pull (CSC) requests; and
// with no stalls the hub's 700 neighbours stream out at PE_PER_PG vertices
// per cycle (bound: 700/2 + 60 cycles).
module tb_hbm_reader;
  import scalabfs_pkg::*;
  localparam int Q = 4, PPG = 2, DW = 128, NLOC = 64, HUB = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mode_e mode = MODE_PUSH;
  sg_base_t base [PPG];
  logic [PPG-1:0] req_valid, req_ready, out_valid, out_ready;
  vid_t req_vid [PPG];
  vmsg_t out_msg [PPG];
  logic ar_valid, ar_ready, ar_id, r_valid, r_ready, r_id, r_last, busy;
  addr_t ar_addr;
  logic [7:0] ar_len;
  logic [DW-1:0] r_data;
  logic ld_en = 0;
  logic [31:0] ld_addr = '0, ld_data = '0;

  hbm_reader #(.Q(Q), .PE_PER_PG(PPG), .DW(DW)) dut (.*);
  hbm_pc_model #(.DW(DW), .WORDS(32768), .GAP_PCT(0)) u_mem (
    .clk, .rst_n, .ld_en, .ld_addr, .ld_data, .ar_valid, .ar_ready, .ar_addr,
    .ar_len, .ar_id, .r_valid, .r_ready, .r_data, .r_id, .r_last);

  logic [31:0] img[$];
  int adj [2][PPG][NLOC][$];          // [csc][pe][local]
  int expect_cnt [longint];
  int n_out, n_cut;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  task automatic put(int csc, int j, output addr_t ob, output addr_t eb);
    int acc = 0;
    repeat ($urandom_range(7)) img.push_back(32'hDEAD_BEEF);
    ob = addr_t'(img.size() * 4);
    for (int l = 0; l < NLOC; l++) begin img.push_back(acc); acc += adj[csc][j][l].size(); end
    img.push_back(acc);
    repeat ($urandom_range(7)) img.push_back(32'hDEAD_BEEF);
    eb = addr_t'(img.size() * 4);
    for (int l = 0; l < NLOC; l++) foreach (adj[csc][j][l][k]) img.push_back(adj[csc][j][l][k]);
  endtask

  // AXI rule checks and output accounting
  always @(posedge clk) if (rst_n) begin
    if (ar_valid && ar_ready) begin
      checks++;
      if (!ar_id) begin
        if (ar_len > 1) begin failures++; $display("FAIL offset read of %0d beats", ar_len + 1); end
      end else begin
        longint unsigned a0, a1;
        a0 = ar_addr; a1 = ar_addr + (ar_len + 1) * (DW / 8) - 1;
        if (ar_len > 63 || (a0 / 1024) != (a1 / 1024)) begin
          failures++; $display("FAIL edge burst len %0d at %0h", ar_len + 1, ar_addr);
        end
        if ((a1 + 1) % 1024 == 0 && ar_len < 63) n_cut++;
      end
    end
    for (int j = 0; j < PPG; j++) if (out_valid[j] && out_ready[j]) begin
      longint key;
      key = {out_msg[j].vid, out_msg[j].aux};
      n_out++;
      checks++;
      if (!expect_cnt.exists(key) || expect_cnt[key] == 0) begin
        failures++;
        if (failures < 10) $display("FAIL unexpected message %0d <- %0d", out_msg[j].vid, out_msg[j].aux);
      end else expect_cnt[key]--;
    end
  end

  task automatic drive(mode_e m, int nreq, int rq_pct, int out_pct);
    int sent [PPG];
    int csc;
    logic [PPG-1:0] acc;
    csc = (m == MODE_PULL);
    mode = m;
    foreach (sent[j]) sent[j] = 0;
    while (sent[0] < nreq || sent[1] < nreq) begin
      @(negedge clk);
      out_ready = '0;
      for (int j = 0; j < PPG; j++) begin
        out_ready[j] = ($urandom_range(99) < out_pct);
        if (!req_valid[j] && sent[j] < nreq && $urandom_range(99) < rq_pct) begin
          int l;
          l = (nreq == 1) ? HUB : $urandom_range(NLOC - 1);
          req_valid[j] = 1;
          req_vid[j]   = vid_t'(l * Q + j);
          foreach (adj[csc][j][l][k]) begin
            longint key;
            key = {vid_t'(adj[csc][j][l][k]), vid_t'(l * Q + j)};
            if (expect_cnt.exists(key)) expect_cnt[key]++; else expect_cnt[key] = 1;
          end
        end
      end
      @(posedge clk);
      acc = req_valid & req_ready;
      #1;
      for (int j = 0; j < PPG; j++) if (acc[j]) begin
        sent[j]++;
        req_valid[j] = 0;
      end
    end
  endtask

  task automatic drain();
    int t = 0;
    @(negedge clk);
    out_ready = '1;
    while (busy && t < 20000) begin @(negedge clk); t++; end
    repeat (5) @(negedge clk);
    chk(!busy, "reader drains");
    begin
      int miss = 0;
      foreach (expect_cnt[k]) begin
        chk(expect_cnt[k] == 0, "every expected message seen");
        if (expect_cnt[k] != 0 && miss++ < 5) $display("  missing %0d <- %0d", k[63:32], k[31:0]);
      end
      if (miss > 0) $display("  %0d missing keys, n_out %0d", miss, n_out);
    end
    expect_cnt.delete();
  endtask

  initial begin
    req_valid = '0; out_ready = '0;
    foreach (req_vid[j]) req_vid[j] = '0;
    for (int c = 0; c < 2; c++)
      for (int j = 0; j < PPG; j++)
        for (int l = 0; l < NLOC; l++)
          repeat ((l == HUB) ? 700 : $urandom_range(40))
            adj[c][j][l].push_back((c << 20) | $urandom_range(4095));
    for (int j = 0; j < PPG; j++) begin
      put(0, j, base[j].csr_off, base[j].csr_edge);
      put(1, j, base[j].csc_off, base[j].csc_edge);
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < img.size(); i++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = i; ld_data = img[i];
    end
    @(negedge clk);
    ld_en = 0;
    // throughput: one hub request, no stalls
    begin
      int t0, t1, n0, cyc;
      n0 = n_out;
      drive(MODE_PUSH, 1, 100, 100);
      cyc = 0;
      while (n_out == n0) begin @(negedge clk); out_ready = '1; end
      while (n_out < n0 + 700 && cyc < 5000) begin @(negedge clk); cyc++; end
      $display("hub: 700 neighbours in %0d cycles", cyc);
      chk(cyc <= 700 / PPG + 60, "PE_PER_PG vertices per cycle");
      drain();
    end
    drive(MODE_PUSH, 200, 60, 70);
    drain();
    drive(MODE_PULL, 200, 60, 70);
    drain();
    drive(MODE_PULL, 100, 100, 100);
    drain();
    chk(n_cut > 0, "edge burst cut at a 1 KB boundary");
    $display("%0d messages, %0d 1KB cuts", n_out, n_cut);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
