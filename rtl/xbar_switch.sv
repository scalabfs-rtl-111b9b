// C x C crossbar switch, the building block of the vertex dispatcher.
//
// Every input i owns one FIFO per output o (C*C FIFOs in all, as the full
// crossbar of the design is counted in FIFOs). A message on input i is
// written into FIFO[i][d], where d = (msg.vid / DIV) % C is the base-C digit
// this layer routes on; the input is ready when that FIFO has room. Output o
// takes one message per cycle from FIFO[0..C-1][o], round robin starting
// after the input it served last. Latency from input to output is one cycle
// through an empty FIFO. The FIFO-per-pair structure and the routing digit
// follow the paper; the round-robin arbiter is this design's choice.
module xbar_switch
  import scalabfs_pkg::*;
#(
  parameter int unsigned C     = 4,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned DIV   = 1   // C^layer: which base-C digit of vid to route on
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  [C-1:0] in_valid,
  output logic  [C-1:0] in_ready,
  input  vmsg_t         in_msg [C],
  output logic  [C-1:0] out_valid,
  input  logic  [C-1:0] out_ready,
  output vmsg_t         out_msg [C],
  output logic          busy      // some FIFO holds a message
);
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1;

  logic  [C-1:0] f_in_valid  [C];  // [input][output]
  logic  [C-1:0] f_in_ready  [C];
  logic  [C-1:0] f_out_valid [C];
  logic  [C-1:0] f_out_ready [C];
  vmsg_t         f_out_data  [C][C];
  logic  [C-1:0] f_nonempty;
  logic  [CW-1:0] digit [C];

  for (genvar i = 0; i < C; i++) begin : g_in
    assign digit[i] = CW'((in_msg[i].vid / DIV) % C);
    always_comb begin
      f_in_valid[i] = '0;
      f_in_valid[i][digit[i]] = in_valid[i];
    end
    assign in_ready[i] = f_in_ready[i][digit[i]];
    for (genvar o = 0; o < C; o++) begin : g_fifo
      sync_fifo #(.WIDTH($bits(vmsg_t)), .DEPTH(DEPTH)) u_fifo (
        .clk, .rst_n,
        .in_valid (f_in_valid[i][o]),
        .in_ready (f_in_ready[i][o]),
        .in_data  (in_msg[i]),
        .out_valid(f_out_valid[i][o]),
        .out_ready(f_out_ready[i][o]),
        .out_data (f_out_data[i][o]),
        .count    ()
      );
    end
    assign f_nonempty[i] = |f_out_valid[i];
  end

  assign busy = |f_nonempty;

  // Round-robin arbiter per output.
  for (genvar o = 0; o < C; o++) begin : g_out
    logic [CW-1:0] last;   // input served last
    logic [CW-1:0] pick;
    logic          any;
    always_comb begin
      any  = 1'b0;
      pick = '0;
      for (int k = 1; k <= C; k++) begin
        int unsigned cand;
        cand = (int'(last) + k) % C;
        if (!any && f_out_valid[cand][o]) begin
          any  = 1'b1;
          pick = CW'(cand);
        end
      end
    end
    assign out_valid[o] = any;
    assign out_msg[o]   = f_out_data[pick][o];
    for (genvar i = 0; i < C; i++) begin : g_rdy
      assign f_out_ready[i][o] = any && (pick == CW'(i)) && out_ready[o];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                        last <= CW'(C-1);
      else if (any && out_ready[o])      last <= pick;
    end
  end
endmodule
