// Self-checking test of pe_check (P2), Q = 4, 256 vertices per PE. A bitmap
// model answers reads one cycle late. Push: a vertex goes on only if its
// bit is 0 (not visited) and leaves as itself. Pull: the message goes on
// only if the parent's bit is 1 (active) and leaves as the child (aux).
// Random input gaps and output stalls; order is kept. At full rate one
// message per cycle must pass.
module tb_pe_check;
  import scalabfs_pkg::*;
  localparam int Q = 4, BITS = 256, WORDS = BITS / 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mode_e mode = MODE_PUSH;
  logic in_valid = 0, out_ready = 0;
  vmsg_t in_msg = '0;
  logic in_ready, bm_rd_en, out_valid, busy;
  logic [2:0] bm_rd_addr;
  logic [31:0] bm_rd_word;
  vid_t out_vid;
  logic [31:0] mem [WORDS];
  vid_t exp_q[$];
  int got;

  pe_check #(.Q(Q), .DEPTH_BITS(BITS)) dut (.*);

  always_ff @(posedge clk) if (bm_rd_en) bm_rd_word <= mem[bm_rd_addr];

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    chk(exp_q.size() > 0 && out_vid == exp_q[0], "output vertex and order");
    if (exp_q.size() > 0) void'(exp_q.pop_front());
    got++;
  end

  task automatic run(mode_e m, int in_pct, int out_pct, int n);
    int sent = 0, cyc = 0;
    got = 0;
    mode = m;
    while (sent < n) begin
      @(negedge clk);
      in_valid  = ($urandom_range(99) < in_pct);
      out_ready = ($urandom_range(99) < out_pct);
      in_msg    = '{vid: vid_t'($urandom_range(BITS - 1) * Q + 1), aux: $urandom};
      @(posedge clk);
      cyc++;
      if (in_valid && in_ready) begin
        int l;
        l = in_msg.vid / Q;
        sent++;
        if (m == MODE_PUSH && !mem[l / 32][l % 32]) exp_q.push_back(in_msg.vid);
        if (m == MODE_PULL &&  mem[l / 32][l % 32]) exp_q.push_back(in_msg.aux);
      end
    end
    @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (4) @(negedge clk);
    chk(exp_q.size() == 0, "all passing messages delivered");
    if (in_pct == 100 && out_pct == 100) chk(cyc == n, "one message per cycle");
    $display("mode %0d: %0d in, %0d out, %0d cycles", m, n, got, cyc);
  endtask

  initial begin
    foreach (mem[w]) mem[w] = $urandom;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    run(MODE_PUSH, 100, 100, 500);
    run(MODE_PUSH, 70, 50, 500);
    run(MODE_PULL, 100, 100, 500);
    run(MODE_PULL, 70, 50, 500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
