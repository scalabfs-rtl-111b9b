// Self-checking test of pe_write (P3), Q = 4, 256 vertices per PE. Models of
// the next frontier and visited bitmaps and the level array take its writes.
// Random vertices, with many repeats and back-to-back duplicates, arrive at
// full rate; every distinct vertex must be written exactly once, with the
// given level, in both bitmaps, and new_count must equal the number of
// distinct vertices.
module tb_pe_write;
  import scalabfs_pkg::*;
  localparam int Q = 4, BITS = 256, WORDS = BITS / 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clr_count = 0, in_valid = 0;
  level_t wr_level = 8'd5;
  vid_t in_vid = '0;
  logic nf_rd_en, set_en, busy;
  logic [2:0] nf_rd_addr;
  logic [31:0] nf_rd_word;
  logic [7:0] set_addr;
  level_t set_level;
  vid_t new_count;
  logic [31:0] nf [WORDS];
  logic [31:0] vis [WORDS];
  level_t lvl [BITS];
  int writes [BITS];

  pe_write #(.Q(Q), .DEPTH_BITS(BITS)) dut (.*);

  always_ff @(posedge clk) begin
    if (nf_rd_en) nf_rd_word <= nf[nf_rd_addr];
    if (rst_n && set_en) begin
      nf[set_addr / 32][set_addr % 32] <= 1'b1;
      vis[set_addr / 32][set_addr % 32] <= 1'b1;
      lvl[set_addr] <= set_level;
      writes[set_addr] <= writes[set_addr] + 1;
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time); end
  endtask

  initial begin
    bit seen [BITS];
    int distinct = 0;
    foreach (nf[w]) begin nf[w] = '0; vis[w] = '0; end
    foreach (writes[i]) begin writes[i] = 0; lvl[i] = '1; seen[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    clr_count = 1;
    @(negedge clk);
    clr_count = 0;
    for (int t = 0; t < 2000; t++) begin
      int l;
      l = (t % 5 == 1) ? int'(in_vid / Q) : $urandom_range(BITS / 2 - 1);  // duplicates
      in_valid = ($urandom_range(99) < 85);
      in_vid   = vid_t'(l * Q + 3);
      if (in_valid && !seen[l]) begin seen[l] = 1; distinct++; end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    chk(!busy, "idle");
    chk(new_count == vid_t'(distinct), "new_count counts each vertex once");
    for (int l = 0; l < BITS; l++) begin
      chk(writes[l] == (seen[l] ? 1 : 0), "written exactly once");
      if (writes[l] != (seen[l] ? 1 : 0)) $display("  l=%0d writes=%0d seen=%0d", l, writes[l], seen[l]);
      chk(nf[l / 32][l % 32] == seen[l] && vis[l / 32][l % 32] == seen[l], "bitmaps set");
      if (seen[l]) chk(lvl[l] == 8'd5, "level written");
    end
    $display("distinct %0d new_count %0d", distinct, new_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
