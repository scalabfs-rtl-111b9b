// Self-checking test of sync_fifo (WIDTH 16, DEPTH 4): random pushes and
// pops against a queue model; checks data order, the full/empty flags and
// the count on every cycle.
module tb_sync_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_ready = 0;
  logic [W-1:0] in_data = '0;
  logic in_ready, out_valid;
  logic [W-1:0] out_data;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] model[$];
  bit saw_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      chk(count == model.size(), "count");
      chk(in_ready == (model.size() < D), "in_ready");
      chk(out_valid == (model.size() > 0), "out_valid");
      if (model.size() > 0) chk(out_data == model[0], "data");
      if (model.size() == D) saw_full = 1;
      in_valid  = ($urandom_range(99) < ((i / 250) % 2 ? 80 : 30));
      out_ready = ($urandom_range(99) < ((i / 250) % 2 ? 30 : 80));
      in_data   = W'($urandom);
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    chk(saw_full, "fifo became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
