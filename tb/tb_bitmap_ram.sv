// Self-checking test of bitmap_ram (256 bits, 8 words): random word writes,
// bit sets and bit clears against a model, with reads on the other port in
// the same cycles. Checks one-cycle read latency, read-first behaviour on a
// same-word write and word-write priority over a bit write.
module tb_bitmap_ram;
  localparam int BITS = 256, WORDS = BITS / 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ra_en = 0, wb_bit_en = 0, wb_bit_val = 0, wb_word_en = 0;
  logic [2:0] ra_addr = '0, wb_word_addr = '0;
  logic [7:0] wb_bit_addr = '0;
  logic [31:0] ra_word, wb_word_data = '0;
  logic [31:0] model [WORDS];
  logic [31:0] expect_word;
  bit pending = 0;

  bitmap_ram #(.DEPTH_BITS(BITS)) dut (.*);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  initial begin
    // clear by word writes
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      wb_word_en = 1; wb_word_addr = w; wb_word_data = '0; model[w] = '0;
    end
    @(negedge clk);
    wb_word_en = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (pending) chk(ra_word == expect_word, "read data");
      ra_en        = $urandom_range(1);
      ra_addr      = $urandom_range(WORDS - 1);
      wb_bit_en    = $urandom_range(1);
      wb_bit_addr  = {ra_addr, 5'($urandom)};   // often the word being read
      if ($urandom_range(1)) wb_bit_addr = 8'($urandom);
      wb_bit_val   = $urandom_range(1);
      wb_word_en   = ($urandom_range(9) == 0);
      wb_word_addr = $urandom_range(WORDS - 1);
      wb_word_data = $urandom;
      // read-first: the read sees the contents before this cycle's write
      pending = ra_en;
      if (ra_en) expect_word = model[ra_addr];
      if (wb_word_en) model[wb_word_addr] = wb_word_data;
      else if (wb_bit_en) model[wb_bit_addr[7:5]][wb_bit_addr[4:0]] = wb_bit_val;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
