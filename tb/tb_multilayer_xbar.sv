// Self-checking test of multilayer_xbar at its default size (64 ports,
// three layers of 4 x 4 switches): random vertices from every input must
// reach output vid % 64 exactly once and in order per input/output pair;
// through an empty dispatcher a vertex takes K = 3 cycles (one per layer);
// the example of the paper's figure (vertex 7 on input 0) must come out of
// output 7; a stalled output must push back to the inputs.
module tb_multilayer_xbar;
  import scalabfs_pkg::*;
  localparam int N = 64, K = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  vmsg_t in_msg [N];
  vmsg_t out_msg [N];
  logic busy;
  vmsg_t exp_q [N][N][$];
  int sent = 0, got = 0, stalls = 0;

  multilayer_xbar dut (.*);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      int i;
      i = out_msg[o].aux;
      got++;
      chk(out_msg[o].vid % N == o, "vertex reaches PE vid % N");
      chk(exp_q[i][o].size() > 0 && exp_q[i][o][0] == out_msg[o], "in order, exactly once");
      if (exp_q[i][o].size() > 0) void'(exp_q[i][o].pop_front());
    end
    for (int i = 0; i < N; i++) if (in_valid[i] && !in_ready[i]) stalls++;
  end

  initial begin
    foreach (in_msg[i]) in_msg[i] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    out_ready = '1;
    in_valid[0] = 1; in_msg[0] = '{vid: 32'd7, aux: 32'd0};
    exp_q[0][7].push_back(in_msg[0]); sent++;
    @(negedge clk);
    in_valid = '0;
    for (int c = 1; c < K; c++) begin
      chk(out_valid == '0, "not out before K cycles");
      @(negedge clk);
    end
    chk(out_valid == (N'(1) << 7), "vertex 7 leaves output 7 after K cycles");
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int o = 0; o < N; o++) out_ready[o] = ($urandom_range(99) < 70);
      if (t >= 1000 && t < 1400) out_ready = '0;
      for (int i = 0; i < N; i++) begin
        in_valid[i] = ($urandom_range(99) < 50);
        in_msg[i]   = '{vid: $urandom, aux: i};
      end
      @(posedge clk);
      for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) begin
        exp_q[i][in_msg[i].vid % N].push_back(in_msg[i]);
        sent++;
      end
    end
    @(negedge clk);
    in_valid = '0; out_ready = '1;
    repeat (200) @(negedge clk);
    chk(got == sent, "all vertices delivered");
    chk(!busy, "dispatcher drained");
    chk(stalls > 0, "back pressure seen");
    $display("sent %0d delivered %0d input stalls %0d", sent, got, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
