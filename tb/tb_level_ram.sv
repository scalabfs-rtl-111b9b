// Self-checking test of level_ram (1024 entries): random writes and reads
// against a model; read data is checked one cycle after the read.
module tb_level_ram;
  import scalabfs_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, re = 0;
  logic [9:0] waddr = '0, raddr = '0;
  level_t wdata = '0, rdata, model [1024], expect_l;
  bit pending = 0;

  level_ram #(.DEPTH(1024)) dut (.*);

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; waddr = i; wdata = level_t'(i * 7); model[i] = level_t'(i * 7);
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (pending) begin
        checks++;
        if (rdata != expect_l) begin failures++; $display("FAIL level read"); end
      end
      we = $urandom_range(1); waddr = $urandom; wdata = $urandom;
      re = $urandom_range(1); raddr = $urandom;
      if (t % 50 == 0) raddr = waddr;
      pending = re;
      if (re) expect_l = model[raddr];
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
