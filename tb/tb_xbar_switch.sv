// Self-checking test of xbar_switch (C = 4, DEPTH 16, routing on the
// second base-4 digit, DIV = 4): random traffic with random output stalls.
// Every message must leave on output (vid / 4) % 4, exactly once, in order
// per input/output pair; a message into an empty switch must appear one
// cycle later; a stalled output must fill its FIFOs and push back.
module tb_xbar_switch;
  import scalabfs_pkg::*;
  localparam int C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [C-1:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  vmsg_t in_msg [C];
  vmsg_t out_msg [C];
  logic busy;
  vmsg_t exp_q [C][C][$];   // [input][output]
  int sent = 0, got = 0, stalls = 0;

  xbar_switch #(.C(C), .DEPTH(16), .DIV(4)) dut (.*);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  // monitor outputs
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < C; o++) if (out_valid[o] && out_ready[o]) begin
      int i;
      i = out_msg[o].aux;   // aux carries the input index
      got++;
      chk((out_msg[o].vid / 4) % 4 == o, "routed to the right output");
      chk(exp_q[i][o].size() > 0 && exp_q[i][o][0] == out_msg[o], "in order, exactly once");
      if (exp_q[i][o].size() > 0) void'(exp_q[i][o].pop_front());
    end
    for (int i = 0; i < C; i++) if (in_valid[i] && !in_ready[i]) stalls++;
  end

  initial begin
    foreach (in_msg[i]) in_msg[i] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // latency: one message into an empty switch
    @(negedge clk);
    out_ready = '1;
    in_valid[2] = 1; in_msg[2] = '{vid: 32'd13, aux: 32'd2};   // digit (13/4)%4 = 3
    exp_q[2][3].push_back(in_msg[2]); sent++;
    @(negedge clk);
    in_valid = '0;
    chk(out_valid == 4'b1000, "one-cycle latency through an empty switch");
    @(negedge clk);
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      out_ready = (t < 1000) ? 4'b0111 | {3'b0, 1'b0} : 4'($urandom);
      if (t >= 1000 && t < 1200) out_ready = '0;
      for (int i = 0; i < C; i++) begin
        in_valid[i] = $urandom_range(1);
        in_msg[i]   = '{vid: $urandom_range(255), aux: i};
      end
      @(posedge clk);
      for (int i = 0; i < C; i++) if (in_valid[i] && in_ready[i]) begin
        exp_q[i][(in_msg[i].vid / 4) % 4].push_back(in_msg[i]);
        sent++;
      end
    end
    @(negedge clk);
    in_valid = '0; out_ready = '1;
    repeat (100) @(negedge clk);
    chk(got == sent, "all messages delivered");
    chk(!busy, "switch drained");
    chk(stalls > 0, "back pressure seen");
    $display("sent %0d delivered %0d input stalls %0d", sent, got, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
