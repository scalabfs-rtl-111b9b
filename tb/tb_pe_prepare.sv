// Self-checking test of pe_prepare (P1) for PE 2 of Q = 4, 512 vertices per
// PE, 300 of them used. A bitmap model answers reads one cycle late. In push
// mode P1 must request exactly the vertices whose bit is set, in order, and
// clear each word it read; in pull mode exactly those whose bit is clear.
// Requests are accepted at random. The scan must end within
// 2 cycles per word + 1 cycle per request + 2.
module tb_pe_prepare;
  import scalabfs_pkg::*;
  localparam int Q = 4, BITS = 512, WORDS = BITS / 32, NLOC = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, req_ready = 0;
  mode_e mode = MODE_PUSH;
  logic [1:0] pe_id = 2'd2;
  vid_t num_local = NLOC;
  logic bm_rd_en, bm_clr_en, req_valid, busy;
  logic [3:0] bm_rd_addr, bm_clr_addr;
  logic [31:0] bm_rd_word;
  vid_t req_vid;
  logic [31:0] mem [WORDS];

  pe_prepare #(.Q(Q), .DEPTH_BITS(BITS)) dut (.*);

  always_ff @(posedge clk) begin
    if (bm_rd_en) bm_rd_word <= mem[bm_rd_addr];
    if (bm_clr_en) mem[bm_clr_addr] <= '0;
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  task automatic scan(mode_e m, int ready_pct);
    vid_t exp_q[$];
    int n = 0, cyc = 0, bound;
    for (int l = 0; l < NLOC; l++)
      if (mem[l / 32][l % 32] == (m == MODE_PUSH)) exp_q.push_back(vid_t'(l * Q + 2));
    bound = 2 * ((NLOC + 31) / 32) + exp_q.size() * (100 / ready_pct) + 2;
    @(negedge clk);
    mode = m; start = 1;
    @(negedge clk);
    start = 0;
    while (busy) begin
      req_ready = ($urandom_range(99) < ready_pct);
      @(posedge clk);
      cyc++;
      if (req_valid && req_ready) begin
        chk(exp_q.size() > n && req_vid == exp_q[n], "request vertex");
        n++;
      end
      @(negedge clk);
    end
    chk(n == exp_q.size(), "number of requests");
    if (ready_pct == 100) chk(cyc <= bound, "scan time");
    $display("mode %0d: %0d requests in %0d cycles (bound %0d)", m, n, cyc, bound);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 4; r++) begin
      foreach (mem[w]) mem[w] = $urandom & $urandom;
      scan(MODE_PULL, r % 2 ? 60 : 100);
      // pull leaves the bitmap alone
      foreach (mem[w]) mem[w] = $urandom & $urandom;
      scan(MODE_PUSH, r % 2 ? 60 : 100);
      for (int w = 0; w < (NLOC + 31) / 32; w++) chk(mem[w] == '0, "push clears the frontier");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
