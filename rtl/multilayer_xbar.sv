// Multi-layer crossbar: the vertex dispatcher of the accelerator.
//
// Delivers every message on any of N inputs to output (vid % N), where
// N = C^K. It is built from K layers of N/C switches of C x C (see
// xbar_switch). Layer l routes on the base-C digit (vid / C^l) % C. Between
// layers, and after the last one, wire w is moved to
//   w' = (w % C) * (N/C) + w / C
// which is the wiring of the two-layer 16 x 16 example (output port p of
// input switch s feeds input s of output switch p) generalised to any K.
// After K layers the digits of the wire index equal those of vid % N, so
// output i feeds PE i. Resource use is K*N*C FIFOs instead of N*N, at the
// price of K hops of latency (one cycle per hop when empty). With K = 1 and
// C = N this is a plain N x N full crossbar. Per input/output pair messages
// stay in order. The same module is used as the soft crossbar that carries
// pull-mode results from one PE to another.
// The layered 4 x 4 structure, the routing on VID digits and the FIFO depth
// of 16 follow the published design; the wiring formula for K > 2 and the
// reuse as soft crossbar are this design's generalisation and choice.
module multilayer_xbar
  import scalabfs_pkg::*;
#(
  parameter int unsigned N     = 64,
  parameter int unsigned C     = 4,
  parameter int unsigned K     = 3,
  parameter int unsigned DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  [N-1:0] in_valid,
  output logic  [N-1:0] in_ready,
  input  vmsg_t         in_msg [N],
  output logic  [N-1:0] out_valid,
  input  logic  [N-1:0] out_ready,
  output vmsg_t         out_msg [N],
  output logic          busy
);
  localparam int unsigned NS = N / C;  // switches per layer

  function automatic int unsigned rot(input int unsigned w);
    return (w % C) * NS + w / C;
  endfunction

  function automatic int unsigned pow_c(input int unsigned e);
    int unsigned r = 1;
    for (int unsigned j = 0; j < e; j++) r = r * C;
    return r;
  endfunction

  // Each layer drives the wires entering the next one (o_*); its inputs are
  // the previous layer's outputs, or the module inputs for layer 0.
  logic [K*NS-1:0] sw_busy;
  assign busy = |sw_busy;

  for (genvar l = 0; l < K; l++) begin : g_layer
    logic  [N-1:0] i_valid, i_ready, o_valid, o_ready;
    vmsg_t         i_msg [N];
    vmsg_t         o_msg [N];

    if (l == 0) begin : g_first
      assign i_valid  = in_valid;
      assign i_msg    = in_msg;
      assign in_ready = i_ready;
    end else begin : g_next
      assign i_valid = g_layer[l-1].o_valid;
      assign i_msg   = g_layer[l-1].o_msg;
      assign g_layer[l-1].o_ready = i_ready;
    end
    if (l == K - 1) begin : g_last
      assign out_valid = o_valid;
      assign out_msg   = o_msg;
      assign o_ready   = out_ready;
    end

    for (genvar s = 0; s < NS; s++) begin : g_sw
      logic  [C-1:0] sv, sr, tv, tr;
      vmsg_t         sm [C];
      vmsg_t         tm [C];
      for (genvar p = 0; p < C; p++) begin : g_port
        assign sv[p] = i_valid[s*C+p];
        assign sm[p] = i_msg[s*C+p];
        assign i_ready[s*C+p] = sr[p];
        assign o_valid[rot(s*C+p)] = tv[p];
        assign o_msg[rot(s*C+p)]   = tm[p];
        assign tr[p] = o_ready[rot(s*C+p)];
      end
      xbar_switch #(.C(C), .DEPTH(DEPTH), .DIV(pow_c(l))) u_sw (
        .clk, .rst_n,
        .in_valid(sv), .in_ready(sr), .in_msg(sm),
        .out_valid(tv), .out_ready(tr), .out_msg(tm),
        .busy(sw_busy[l*NS+s])
      );
    end
  end

  initial begin
    assert (pow_c(K) == N) else $error("multilayer_xbar: N must equal C**K");
  end
endmodule
