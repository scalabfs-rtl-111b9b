// Top level of the BFS accelerator.
//
// NUM_PG processing groups, one per HBM pseudo channel, each with
// NUM_PE/NUM_PG PEs and an HBM reader; a vertex dispatcher (multi-layer
// crossbar, XBAR_K layers of XBAR_C x XBAR_C switches) that takes the
// neighbour-list vertices read by all groups and delivers each one to PE
// (vid % NUM_PE); a second crossbar of the same kind, the soft crossbar, that
// in pull mode carries a reached child vertex from the PE that checked its
// parent to the PE that owns the child; and the scheduler.
//
// Host interface (plain signals): put the graph into HBM as per-PE CSR and
// CSC subgraphs (see `sg_base`: PE p owns vertices v with v % NUM_PE == p,
// local index v / NUM_PE, 32-bit offsets local to the subgraph, 32-bit
// global vertex IDs in the edge arrays), then pulse `start` with `root`,
// `num_vertices`, `policy` and `pull_shift` held. `done` rises when the
// search is over. Afterwards `lv_rd_valid`/`lv_rd_vid` read back the level
// of any vertex; `lv_rsp_level` follows three cycles later (LEVEL_INF for
// an unreached vertex).
//
// Memory interface: one AXI4 read port per group (AR: valid, ready, addr,
// len, id; R: valid, ready, data, id, last), data width 2 * PE_PER_PG * 32
// bits. Defaults are the paper's largest configuration: 32 pseudo channels,
// 64 PEs, 3-layer 4 x 4 dispatcher.
module scalabfs_top
  import scalabfs_pkg::*;
#(
  parameter int unsigned NUM_PG       = 32,
  parameter int unsigned NUM_PE       = 64,
  parameter int unsigned XBAR_C       = 4,
  parameter int unsigned XBAR_K       = 3,
  parameter int unsigned VERTS_PER_PE = 131072,
  localparam int unsigned PE_PER_PG = NUM_PE / NUM_PG,
  localparam int unsigned DW        = 2 * PE_PER_PG * VID_W,
  localparam int unsigned QW        = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned BAW       = $clog2(VERTS_PER_PE)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host control
  input  logic          start,
  input  vid_t          root,
  input  vid_t          num_vertices,
  input  policy_e       policy,
  input  logic [4:0]    pull_shift,
  input  sg_base_t      sg_base [NUM_PE],
  output logic          busy,
  output logic          done,
  output logic          overflow,
  output level_t        bfs_level,
  output logic [15:0]   push_iters,
  output logic [15:0]   pull_iters,
  // level read-out
  input  logic          lv_rd_valid,
  input  vid_t          lv_rd_vid,
  output logic          lv_rsp_valid,
  output level_t        lv_rsp_level,
  // one AXI4 read port per HBM pseudo channel
  output logic  [NUM_PG-1:0] m_ar_valid,
  input  logic  [NUM_PG-1:0] m_ar_ready,
  output addr_t         m_ar_addr [NUM_PG],
  output logic [AXI_LW-1:0] m_ar_len [NUM_PG],
  output logic  [NUM_PG-1:0] m_ar_id,
  input  logic  [NUM_PG-1:0] m_r_valid,
  output logic  [NUM_PG-1:0] m_r_ready,
  input  logic [DW-1:0] m_r_data [NUM_PG],
  input  logic  [NUM_PG-1:0] m_r_id,
  input  logic  [NUM_PG-1:0] m_r_last
);
  // scheduler broadcast
  logic   cmd_valid;
  cmd_e   cmd;
  mode_e  mode;

  logic  [NUM_PE-1:0] pe_ready;
  logic  [NUM_PG-1:0] pg_busy;
  vid_t               new_count [NUM_PE];
  vid_t               new_total;
  logic               dsp_busy, sx_busy;

  logic  [NUM_PE-1:0] dsp_i_valid, dsp_i_ready, dsp_o_valid, dsp_o_ready;
  vmsg_t              dsp_i_msg [NUM_PE];
  vmsg_t              dsp_o_msg [NUM_PE];
  logic  [NUM_PE-1:0] sx_i_valid, sx_i_ready, sx_o_valid;
  vmsg_t              sx_i_msg [NUM_PE];
  vmsg_t              sx_o_msg [NUM_PE];
  vid_t               sx_i_vid [NUM_PE];
  vid_t               sx_o_vid [NUM_PE];
  logic  [NUM_PE-1:0] lv_sel, lv_rsp_v;
  level_t             lv_rsp_l [NUM_PE];

  always_comb begin
    new_total = '0;
    for (int p = 0; p < NUM_PE; p++) new_total = new_total + new_count[p];
  end

  scheduler u_sched (
    .clk, .rst_n, .start, .policy, .pull_shift, .num_vertices,
    .all_ready(&pe_ready), .datapath_busy((|pg_busy) || dsp_busy || sx_busy),
    .new_total, .cmd_valid, .cmd, .mode, .bfs_level,
    .busy, .done, .overflow, .push_iters, .pull_iters
  );

  for (genvar g = 0; g < NUM_PG; g++) begin : g_pg
    sg_base_t base [PE_PER_PG];
    vid_t     nc   [PE_PER_PG];
    vmsg_t    d_out [PE_PER_PG];
    vmsg_t    d_in  [PE_PER_PG];
    vid_t     s_out [PE_PER_PG];
    vid_t     s_in  [PE_PER_PG];
    level_t   lv_l  [PE_PER_PG];
    for (genvar j = 0; j < PE_PER_PG; j++) begin : g_map
      localparam int unsigned P = g * PE_PER_PG + j;
      assign base[j]          = sg_base[P];
      assign new_count[P]     = nc[j];
      assign dsp_i_msg[P]     = d_out[j];
      assign d_in[j]          = dsp_o_msg[P];
      assign sx_i_vid[P]      = s_out[j];
      assign s_in[j]          = sx_o_vid[P];
      assign lv_rsp_l[P]      = lv_l[j];
    end
    pg #(.Q(NUM_PE), .PE_PER_PG(PE_PER_PG), .VERTS_PER_PE(VERTS_PER_PE), .DW(DW)) u_pg (
      .clk, .rst_n,
      .pe_id_base(QW'(g * PE_PER_PG)),
      .base,
      .cmd_valid, .cmd, .mode, .bfs_level, .num_vertices, .root,
      .pe_ready(pe_ready[g*PE_PER_PG +: PE_PER_PG]),
      .busy(pg_busy[g]),
      .new_count(nc),
      .ar_valid(m_ar_valid[g]), .ar_ready(m_ar_ready[g]), .ar_addr(m_ar_addr[g]),
      .ar_len(m_ar_len[g]), .ar_id(m_ar_id[g]),
      .r_valid(m_r_valid[g]), .r_ready(m_r_ready[g]), .r_data(m_r_data[g]),
      .r_id(m_r_id[g]), .r_last(m_r_last[g]),
      .dsp_out_valid(dsp_i_valid[g*PE_PER_PG +: PE_PER_PG]),
      .dsp_out_ready(dsp_i_ready[g*PE_PER_PG +: PE_PER_PG]),
      .dsp_out_msg(d_out),
      .dsp_in_valid(dsp_o_valid[g*PE_PER_PG +: PE_PER_PG]),
      .dsp_in_ready(dsp_o_ready[g*PE_PER_PG +: PE_PER_PG]),
      .dsp_in_msg(d_in),
      .sx_out_valid(sx_i_valid[g*PE_PER_PG +: PE_PER_PG]),
      .sx_out_ready(sx_i_ready[g*PE_PER_PG +: PE_PER_PG]),
      .sx_out_vid(s_out),
      .sx_in_valid(sx_o_valid[g*PE_PER_PG +: PE_PER_PG]),
      .sx_in_vid(s_in),
      .lv_rd_valid(lv_sel[g*PE_PER_PG +: PE_PER_PG]),
      .lv_rd_local(BAW'(lv_rd_vid / NUM_PE)),
      .lv_rsp_valid(lv_rsp_v[g*PE_PER_PG +: PE_PER_PG]),
      .lv_rsp_level(lv_l)
    );
  end

  // vertex dispatcher: neighbour vertices -> PE (vid % NUM_PE)
  multilayer_xbar #(.N(NUM_PE), .C(XBAR_C), .K(XBAR_K)) u_dispatcher (
    .clk, .rst_n,
    .in_valid(dsp_i_valid), .in_ready(dsp_i_ready), .in_msg(dsp_i_msg),
    .out_valid(dsp_o_valid), .out_ready(dsp_o_ready), .out_msg(dsp_o_msg),
    .busy(dsp_busy)
  );

  // soft crossbar: pull-mode children -> owning PE's P3 (always accepts)
  for (genvar p = 0; p < NUM_PE; p++) begin : g_sx
    assign sx_i_msg[p] = '{vid: sx_i_vid[p], aux: '0};
    assign sx_o_vid[p] = sx_o_msg[p].vid;
  end

  multilayer_xbar #(.N(NUM_PE), .C(XBAR_C), .K(XBAR_K)) u_soft_xbar (
    .clk, .rst_n,
    .in_valid(sx_i_valid), .in_ready(sx_i_ready), .in_msg(sx_i_msg),
    .out_valid(sx_o_valid), .out_ready('1), .out_msg(sx_o_msg),
    .busy(sx_busy)
  );

  // level read-out
  always_comb begin
    lv_sel = '0;
    lv_sel[lv_rd_vid % NUM_PE] = lv_rd_valid;
    lv_rsp_valid = |lv_rsp_v;
    lv_rsp_level = LEVEL_INF;
    for (int p = 0; p < NUM_PE; p++)
      if (lv_rsp_v[p]) lv_rsp_level = lv_rsp_l[p];
  end
endmodule
