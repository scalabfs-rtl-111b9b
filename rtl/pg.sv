// Processing group (PG): the PEs attached to one HBM pseudo channel.
//
// A PG holds PE_PER_PG PEs with global IDs pe_id_base + j and one HBM
// reader that serves all of them through the group's single AXI read port,
// so every PG only ever reads its own pseudo channel. The neighbour lists
// leave the PG toward the vertex dispatcher (`dsp_out_*`), and the
// dispatched vertices come back into the PEs (`dsp_in_*`); the same holds
// for the pull-mode soft crossbar (`sx_*`). Scheduler commands are broadcast
// to every PE. The grouping follows the paper; the port list is this
// design's own.
module pg
  import scalabfs_pkg::*;
#(
  parameter int unsigned Q            = 64,
  parameter int unsigned PE_PER_PG    = 2,
  parameter int unsigned VERTS_PER_PE = 131072,
  parameter int unsigned DW           = 2 * PE_PER_PG * VID_W,
  localparam int unsigned QW  = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned BAW = $clog2(VERTS_PER_PE)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [QW-1:0] pe_id_base,
  input  sg_base_t      base [PE_PER_PG],
  // scheduler broadcast
  input  logic          cmd_valid,
  input  cmd_e          cmd,
  input  mode_e         mode,
  input  level_t        bfs_level,
  input  vid_t          num_vertices,
  input  vid_t          root,
  output logic  [PE_PER_PG-1:0] pe_ready,
  output logic          busy,
  output vid_t          new_count [PE_PER_PG],
  // AXI4 read
  output logic          ar_valid,
  input  logic          ar_ready,
  output addr_t         ar_addr,
  output logic [AXI_LW-1:0] ar_len,
  output logic          ar_id,
  input  logic          r_valid,
  output logic          r_ready,
  input  logic [DW-1:0] r_data,
  input  logic          r_id,
  input  logic          r_last,
  // to / from vertex dispatcher
  output logic  [PE_PER_PG-1:0] dsp_out_valid,
  input  logic  [PE_PER_PG-1:0] dsp_out_ready,
  output vmsg_t         dsp_out_msg [PE_PER_PG],
  input  logic  [PE_PER_PG-1:0] dsp_in_valid,
  output logic  [PE_PER_PG-1:0] dsp_in_ready,
  input  vmsg_t         dsp_in_msg [PE_PER_PG],
  // to / from soft crossbar
  output logic  [PE_PER_PG-1:0] sx_out_valid,
  input  logic  [PE_PER_PG-1:0] sx_out_ready,
  output vid_t          sx_out_vid [PE_PER_PG],
  input  logic  [PE_PER_PG-1:0] sx_in_valid,
  input  vid_t          sx_in_vid [PE_PER_PG],
  // level read-out
  input  logic  [PE_PER_PG-1:0] lv_rd_valid,
  input  logic [BAW-1:0] lv_rd_local,
  output logic  [PE_PER_PG-1:0] lv_rsp_valid,
  output level_t        lv_rsp_level [PE_PER_PG]
);
  logic [PE_PER_PG-1:0] req_valid, req_ready, pipe_busy;
  vid_t                 req_vid [PE_PER_PG];
  logic                 rd_busy;

  hbm_reader #(.Q(Q), .PE_PER_PG(PE_PER_PG), .DW(DW)) u_reader (
    .clk, .rst_n, .mode, .base,
    .req_valid, .req_ready, .req_vid,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .ar_id,
    .r_valid, .r_ready, .r_data, .r_id, .r_last,
    .out_valid(dsp_out_valid), .out_ready(dsp_out_ready), .out_msg(dsp_out_msg),
    .busy(rd_busy)
  );

  for (genvar j = 0; j < PE_PER_PG; j++) begin : g_pe
    pe #(.Q(Q), .VERTS_PER_PE(VERTS_PER_PE)) u_pe (
      .clk, .rst_n,
      .pe_id(pe_id_base + QW'(j)),
      .cmd_valid, .cmd, .mode, .bfs_level, .num_vertices, .root,
      .ready(pe_ready[j]), .pipe_busy(pipe_busy[j]), .new_count(new_count[j]),
      .req_valid(req_valid[j]), .req_ready(req_ready[j]), .req_vid(req_vid[j]),
      .d_valid(dsp_in_valid[j]), .d_ready(dsp_in_ready[j]), .d_msg(dsp_in_msg[j]),
      .sx_out_valid(sx_out_valid[j]), .sx_out_ready(sx_out_ready[j]), .sx_out_vid(sx_out_vid[j]),
      .sx_in_valid(sx_in_valid[j]), .sx_in_vid(sx_in_vid[j]),
      .lv_rd_valid(lv_rd_valid[j]), .lv_rd_local,
      .lv_rsp_valid(lv_rsp_valid[j]), .lv_rsp_level(lv_rsp_level[j])
    );
  end

  assign busy = rd_busy || (|pipe_busy);
endmodule
