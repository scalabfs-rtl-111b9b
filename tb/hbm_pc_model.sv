// Behavioural model of one HBM pseudo channel seen through its AXI4 read
// port; testbench use only, not synthesizable.
//
// The memory is an array of 32-bit words indexed by (byte address % 256 MB)/4,
// modulo WORDS. A testbench fills it through the ld_* port (one word per
// cycle). Read bursts are accepted up to 16 at a time; the first beat of a
// burst comes LAT cycles after it was accepted at the earliest, then one beat
// per cycle in order, with a random idle cycle now and then (GAP_PCT percent)
// and whatever stalls r_ready asks for. IDs are returned as given.
module hbm_pc_model #(
  parameter int unsigned DW      = 128,
  parameter int unsigned WORDS   = 65536,
  parameter int unsigned LAT     = 20,
  parameter int unsigned GAP_PCT = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld_en,
  input  logic [31:0]   ld_addr,   // word index
  input  logic [31:0]   ld_data,
  input  logic          ar_valid,
  output logic          ar_ready,
  input  logic [32:0]   ar_addr,
  input  logic [7:0]    ar_len,
  input  logic          ar_id,
  output logic          r_valid,
  input  logic          r_ready,
  output logic [DW-1:0] r_data,
  output logic          r_id,
  output logic          r_last
);
  localparam int unsigned LANES = DW / 32;

  logic [31:0] mem [WORDS];

  typedef struct {
    longint unsigned due;
    logic [32:0]     addr;
    int unsigned     len;
    logic            id;
  } burst_t;

  burst_t          q[$];
  longint unsigned now;
  int unsigned     beat;
  logic            gap;

  assign ar_ready = (q.size() < 16);

  function automatic logic [DW-1:0] beat_data(logic [32:0] a);
    logic [DW-1:0] d;
    longint unsigned w0;
    w0 = (longint'(a) % (64'd1 << 28)) / 4;
    for (int l = 0; l < LANES; l++) d[l*32 +: 32] = mem[(w0 + l) % WORDS];
    return d;
  endfunction

  always_comb begin
    r_valid = 1'b0;
    r_data  = '0;
    r_id    = 1'b0;
    r_last  = 1'b0;
    if (q.size() > 0 && q[0].due <= now && !gap) begin
      r_valid = 1'b1;
      r_data  = beat_data(q[0].addr + 33'(beat * (DW / 8)));
      r_id    = q[0].id;
      r_last  = (beat == q[0].len);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now  <= 0;
      beat <= 0;
      gap  <= 1'b0;
      q.delete();
    end else begin
      now <= now + 1;
      gap <= ($urandom_range(99) < GAP_PCT);
      if (ld_en) mem[ld_addr % WORDS] <= ld_data;
      if (r_valid && r_ready) begin
        if (beat == q[0].len) begin
          void'(q.pop_front());
          beat <= 0;
        end else beat <= beat + 1;
      end
      if (ar_valid && ar_ready) begin
        burst_t b;
        b.due  = now + LAT;
        b.addr = ar_addr;
        b.len  = ar_len;
        b.id   = ar_id;
        q.push_back(b);
      end
    end
  end
endmodule
