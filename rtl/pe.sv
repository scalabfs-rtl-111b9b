// Hybrid-mode processing element (PE).
//
// A PE owns the vertices v with v % Q == pe_id; vertex v is stored at local
// index v / Q. It holds three bitmaps of these vertices (two frontier RAMs,
// of which one is the current and the other the next frontier, selected by
// `cur_sel`, and the visited map), the level array, and the three stages:
// P1 (pe_prepare) finds work in the bitmaps and asks the HBM reader for
// neighbour lists, P2 (pe_check) checks the vertices the dispatcher brings
// back, P3 (pe_write) records newly reached vertices. The same stages serve
// both modes; `mode` only changes which bitmap each stage uses:
//
//            P1 reads        P2 reads           P3 sets
//   push     current (clr)   visited            next, visited, level
//   pull     visited         current            next, visited, level
//
// In push mode P2's survivors go straight to this PE's P3. In pull mode
// P2 emits the child vertex, which may belong to another PE, on
// `sx_out_*` (into the soft crossbar); P3 then takes its input from
// `sx_in_*`. Each bitmap sees at most one read and one write per cycle, the
// two operations of a double-pumped BRAM.
//
// Commands (one-cycle `cmd_valid`, accepted only while `ready`):
//   CMD_INIT  clear the used words of all three bitmaps, then mark `root`
//             visited and active with level 0 if this PE owns it;
//   CMD_ITER  start P1 in `mode`, clear the new-vertex counter;
//   CMD_SWAP  exchange current and next frontier. After a pull iteration the
//             frontier that becomes "next" was not cleared by P1, so it is
//             cleared here by a sweep (one word per cycle).
// Level read-out (while idle): lv_rd_valid with the local index; the
// answer follows two cycles later, LEVEL_INF for a vertex not visited.
// The three bitmaps, the level array, the three stages and the swap at the
// iteration boundary follow the published design; the command protocol, the
// clearing sweeps and the read-out port are this design's own.
module pe
  import scalabfs_pkg::*;
#(
  parameter int unsigned Q            = 64,
  parameter int unsigned VERTS_PER_PE = 131072,
  localparam int unsigned WORDS = VERTS_PER_PE / BM_W,
  localparam int unsigned WAW   = $clog2(WORDS),
  localparam int unsigned BAW   = $clog2(VERTS_PER_PE),
  localparam int unsigned QW    = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [QW-1:0]  pe_id,
  // scheduler
  input  logic           cmd_valid,
  input  cmd_e           cmd,
  input  mode_e          mode,
  input  level_t         bfs_level,
  input  vid_t           num_vertices,
  input  vid_t           root,
  output logic           ready,      // no command in progress, P1 idle
  output logic           pipe_busy,  // P2 or P3 holds a vertex
  output vid_t           new_count,
  // P1 -> HBM reader
  output logic           req_valid,
  input  logic           req_ready,
  output vid_t           req_vid,
  // vertex dispatcher -> P2
  input  logic           d_valid,
  output logic           d_ready,
  input  vmsg_t          d_msg,
  // P2 -> soft crossbar (pull)
  output logic           sx_out_valid,
  input  logic           sx_out_ready,
  output vid_t           sx_out_vid,
  // soft crossbar -> P3 (pull), always accepted
  input  logic           sx_in_valid,
  input  vid_t           sx_in_vid,
  // level read-out
  input  logic           lv_rd_valid,
  input  logic [BAW-1:0] lv_rd_local,
  output logic           lv_rsp_valid,
  output level_t         lv_rsp_level
);
  typedef enum logic [2:0] {C_IDLE, C_CLR_ALL, C_ROOT, C_CLR_NEXT} cstate_e;
  cstate_e        cstate;
  logic           cur_sel;
  mode_e          mode_q, last_mode;
  level_t         wr_level;
  logic [WAW:0]   sweep, sweep_n;
  vid_t           num_local;
  logic           p1_busy, p1_start;

  assign num_local = (num_vertices > vid_t'(pe_id)) ?
                     (num_vertices - vid_t'(pe_id) + vid_t'(Q) - 1) / vid_t'(Q) : '0;
  assign sweep_n   = (WAW+1)'((num_local + BM_W - 1) / BM_W);

  // ---------------------------------------------------------------- memories
  logic            f_ra_en   [2];
  logic [WAW-1:0]  f_ra_addr [2];
  logic [BM_W-1:0] f_ra_word [2];
  logic            f_wb_bit_en [2];
  logic [BAW-1:0]  f_wb_bit_addr [2];
  logic            f_wb_word_en [2];
  logic [WAW-1:0]  f_wb_word_addr [2];
  logic            v_ra_en, v_wb_bit_en, v_wb_word_en;
  logic [WAW-1:0]  v_ra_addr, v_wb_word_addr;
  logic [BAW-1:0]  v_wb_bit_addr;
  logic [BM_W-1:0] v_ra_word;

  for (genvar f = 0; f < 2; f++) begin : g_front
    bitmap_ram #(.DEPTH_BITS(VERTS_PER_PE)) u_front (
      .clk,
      .ra_en(f_ra_en[f]), .ra_addr(f_ra_addr[f]), .ra_word(f_ra_word[f]),
      .wb_bit_en(f_wb_bit_en[f]), .wb_bit_addr(f_wb_bit_addr[f]), .wb_bit_val(1'b1),
      .wb_word_en(f_wb_word_en[f]), .wb_word_addr(f_wb_word_addr[f]), .wb_word_data('0)
    );
  end

  bitmap_ram #(.DEPTH_BITS(VERTS_PER_PE)) u_visited (
    .clk,
    .ra_en(v_ra_en), .ra_addr(v_ra_addr), .ra_word(v_ra_word),
    .wb_bit_en(v_wb_bit_en), .wb_bit_addr(v_wb_bit_addr), .wb_bit_val(1'b1),
    .wb_word_en(v_wb_word_en), .wb_word_addr(v_wb_word_addr), .wb_word_data('0)
  );

  logic           lv_we;
  logic [BAW-1:0] lv_waddr;
  level_t         lv_wdata, lv_rdata;

  level_ram #(.DEPTH(VERTS_PER_PE)) u_level (
    .clk,
    .we(lv_we), .waddr(lv_waddr), .wdata(lv_wdata),
    .re(lv_rd_valid), .raddr(lv_rd_local), .rdata(lv_rdata)
  );

  // ---------------------------------------------------------------- stages
  logic            p1_rd_en, p1_clr_en;
  logic [WAW-1:0]  p1_rd_addr, p1_clr_addr;
  logic [BM_W-1:0] p1_rd_word;

  pe_prepare #(.Q(Q), .DEPTH_BITS(VERTS_PER_PE)) u_p1 (
    .clk, .rst_n, .start(p1_start), .mode(mode), .pe_id, .num_local,
    .bm_rd_en(p1_rd_en), .bm_rd_addr(p1_rd_addr), .bm_rd_word(p1_rd_word),
    .bm_clr_en(p1_clr_en), .bm_clr_addr(p1_clr_addr),
    .req_valid, .req_ready, .req_vid, .busy(p1_busy)
  );

  logic            p2_rd_en, p2_out_valid, p2_out_ready, p2_busy;
  logic [WAW-1:0]  p2_rd_addr;
  logic [BM_W-1:0] p2_rd_word;
  vid_t            p2_out_vid;

  pe_check #(.Q(Q), .DEPTH_BITS(VERTS_PER_PE)) u_p2 (
    .clk, .rst_n, .mode(mode_q),
    .in_valid(d_valid), .in_ready(d_ready), .in_msg(d_msg),
    .bm_rd_en(p2_rd_en), .bm_rd_addr(p2_rd_addr), .bm_rd_word(p2_rd_word),
    .out_valid(p2_out_valid), .out_ready(p2_out_ready), .out_vid(p2_out_vid),
    .busy(p2_busy)
  );

  assign sx_out_valid = (mode_q == MODE_PULL) && p2_out_valid;
  assign sx_out_vid   = p2_out_vid;
  assign p2_out_ready = (mode_q == MODE_PULL) ? sx_out_ready : 1'b1;

  logic            p3_in_valid, p3_rd_en, p3_set_en, p3_busy;
  vid_t            p3_in_vid;
  logic [WAW-1:0]  p3_rd_addr;
  logic [BM_W-1:0] p3_rd_word;
  logic [BAW-1:0]  p3_set_addr;
  level_t          p3_set_level;

  assign p3_in_valid = (mode_q == MODE_PULL) ? sx_in_valid : p2_out_valid;
  assign p3_in_vid   = (mode_q == MODE_PULL) ? sx_in_vid   : p2_out_vid;

  pe_write #(.Q(Q), .DEPTH_BITS(VERTS_PER_PE)) u_p3 (
    .clk, .rst_n, .clr_count(p1_start), .wr_level,
    .in_valid(p3_in_valid), .in_vid(p3_in_vid),
    .nf_rd_en(p3_rd_en), .nf_rd_addr(p3_rd_addr), .nf_rd_word(p3_rd_word),
    .set_en(p3_set_en), .set_addr(p3_set_addr), .set_level(p3_set_level),
    .new_count, .busy(p3_busy)
  );

  assign pipe_busy = p2_busy || p3_busy;

  // ---------------------------------------------------------------- root
  logic           own_root;
  logic [BAW-1:0] root_local;
  assign own_root   = (root % Q) == vid_t'(pe_id);
  assign root_local = BAW'(root / Q);

  // ---------------------------------------------------------------- port muxes
  wire sweep_all  = (cstate == C_CLR_ALL);
  wire sweep_next = (cstate == C_CLR_NEXT);
  wire root_set   = (cstate == C_ROOT) && own_root;

  always_comb begin
    // current frontier = F[cur_sel], next = F[!cur_sel]
    for (int f = 0; f < 2; f++) begin
      logic is_cur;
      is_cur = (f == int'(cur_sel));
      f_ra_en[f]        = is_cur ? (p1_rd_en || p2_rd_en) : p3_rd_en;
      f_ra_addr[f]      = is_cur ? ((mode_q == MODE_PUSH) ? p1_rd_addr : p2_rd_addr) : p3_rd_addr;
      f_wb_word_en[f]   = sweep_all || (!is_cur && sweep_next) ||
                          (is_cur && p1_clr_en);
      f_wb_word_addr[f] = (sweep_all || sweep_next) ? sweep[WAW-1:0] : p1_clr_addr;
      f_wb_bit_en[f]    = is_cur ? root_set : p3_set_en;
      f_wb_bit_addr[f]  = is_cur ? root_local : p3_set_addr;
    end
  end

  wire [BM_W-1:0] cur_word = cur_sel ? f_ra_word[1] : f_ra_word[0];
  assign p3_rd_word = cur_sel ? f_ra_word[0] : f_ra_word[1];
  assign p1_rd_word = (mode_q == MODE_PUSH) ? cur_word : v_ra_word;
  assign p2_rd_word = (mode_q == MODE_PUSH) ? v_ra_word : cur_word;

  always_comb begin
    v_ra_en   = lv_rd_valid || ((mode_q == MODE_PUSH) ? p2_rd_en : p1_rd_en);
    v_ra_addr = lv_rd_valid ? lv_rd_local[BAW-1:$clog2(BM_W)] :
                (mode_q == MODE_PUSH) ? p2_rd_addr : p1_rd_addr;
    v_wb_word_en   = sweep_all;
    v_wb_word_addr = sweep[WAW-1:0];
    v_wb_bit_en    = root_set || p3_set_en;
    v_wb_bit_addr  = root_set ? root_local : p3_set_addr;
  end

  assign lv_we    = root_set || p3_set_en;
  assign lv_waddr = root_set ? root_local : p3_set_addr;
  assign lv_wdata = root_set ? '0 : p3_set_level;

  // level read-out pipeline
  logic [$clog2(BM_W)-1:0] lv_bit_q;
  logic                    lv_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lv_q         <= 1'b0;
      lv_bit_q     <= '0;
      lv_rsp_valid <= 1'b0;
      lv_rsp_level <= LEVEL_INF;
    end else begin
      lv_q         <= lv_rd_valid;
      lv_bit_q     <= lv_rd_local[$clog2(BM_W)-1:0];
      lv_rsp_valid <= lv_q;
      lv_rsp_level <= v_ra_word[lv_bit_q] ? lv_rdata : LEVEL_INF;
    end
  end

  // ---------------------------------------------------------------- control
  assign ready    = (cstate == C_IDLE) && !p1_busy && !cmd_valid;
  assign p1_start = cmd_valid && (cmd == CMD_ITER) && (cstate == C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate    <= C_IDLE;
      cur_sel   <= 1'b0;
      mode_q    <= MODE_PUSH;
      last_mode <= MODE_PUSH;
      wr_level  <= '0;
      sweep     <= '0;
    end else begin
      unique case (cstate)
        C_IDLE: if (cmd_valid) begin
          unique case (cmd)
            CMD_INIT: begin
              cur_sel   <= 1'b0;
              mode_q    <= MODE_PUSH;
              last_mode <= MODE_PUSH;
              sweep     <= '0;
              cstate    <= (sweep_n == '0) ? C_ROOT : C_CLR_ALL;
            end
            CMD_ITER: begin
              mode_q    <= mode;
              last_mode <= mode;
              wr_level  <= bfs_level + 1'b1;
            end
            CMD_SWAP: begin
              cur_sel <= !cur_sel;
              sweep   <= '0;
              if (last_mode == MODE_PULL && sweep_n != '0) cstate <= C_CLR_NEXT;
            end
            default: ;
          endcase
        end
        C_CLR_ALL: begin
          sweep <= sweep + 1'b1;
          if (sweep + 1'b1 == sweep_n) cstate <= C_ROOT;
        end
        C_ROOT: cstate <= C_IDLE;
        C_CLR_NEXT: begin
          sweep <= sweep + 1'b1;
          if (sweep + 1'b1 == sweep_n) cstate <= C_IDLE;
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  // A frontier word is never written from two sources in one cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(p1_clr_en && (sweep_all || sweep_next)));
endmodule
