// HBM reader of a processing group: an AXI4 read master on one HBM
// pseudo channel, shared by the PE_PER_PG PEs of the group.
//
// For each vertex request from a PE's P1 it performs two reads, as the
// paper describes: first the offset pair offset[l], offset[l+1] of the
// vertex (l = vid / Q) from the CSR offset array (push) or CSC offset array
// (pull) of that PE's subgraph, then the neighbour list edge[offset[l] ..
// offset[l+1]-1] from the matching edge array. Offsets and edges are 32-bit
// words; one AXI beat of DW bits holds LANES = DW/32 of them.
//
// Structure (all choices of this design):
//  * Offset reads use AXI ID 0 and read one beat, or two when the pair
//    straddles a beat. They are issued only while the offset result FIFO has
//    room for every answer in flight, so ID 0 data is always accepted.
//  * Edge reads use AXI ID 1 and are cut into bursts of at most MAX_BURST
//    beats that never cross a 1 KB boundary (so never a 4 KB one). Each
//    burst carries lane masks for its first and last beat.
//  * Edge beats are unpacked onto PE_PER_PG output ports toward the vertex
//    dispatcher: port j sends lanes j, j+PE_PER_PG, ... of the beat, one
//    vertex per cycle. Each message is {vid = neighbour, aux = requesting
//    vertex}; in pull mode aux is the child that P2 forwards.
// Edge reads have priority over offset reads on the AR channel. The reader
// assumes the memory answers each ID in order. `busy` is high while any
// request, read or vertex is inside.
module hbm_reader
  import scalabfs_pkg::*;
#(
  parameter int unsigned Q         = 64,
  parameter int unsigned PE_PER_PG = 2,
  parameter int unsigned DW        = 2 * PE_PER_PG * VID_W,
  parameter int unsigned MAX_BURST = 64,
  parameter int unsigned DEPTH     = 16,
  localparam int unsigned LANES = DW / 32,
  localparam int unsigned PW    = (PE_PER_PG > 1) ? $clog2(PE_PER_PG) : 1,
  localparam int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  mode_e         mode,
  input  sg_base_t      base [PE_PER_PG],
  // requests from P1 of each PE
  input  logic  [PE_PER_PG-1:0] req_valid,
  output logic  [PE_PER_PG-1:0] req_ready,
  input  vid_t          req_vid [PE_PER_PG],
  // AXI4 read address channel
  output logic          ar_valid,
  input  logic          ar_ready,
  output addr_t         ar_addr,
  output logic [AXI_LW-1:0] ar_len,
  output logic          ar_id,
  // AXI4 read data channel
  input  logic          r_valid,
  output logic          r_ready,
  input  logic [DW-1:0] r_data,
  input  logic          r_id,
  input  logic          r_last,
  // neighbour vertices toward the dispatcher
  output logic  [PE_PER_PG-1:0] out_valid,
  input  logic  [PE_PER_PG-1:0] out_ready,
  output vmsg_t         out_msg [PE_PER_PG],
  output logic          busy
);
  localparam int unsigned BEAT_B = DW / 8;
  localparam int unsigned CNTW   = $clog2(DEPTH + 1);

  // -------------------------------------------------------------- offset AR
  typedef struct packed {
    vid_t          vid;
    logic [PW-1:0] pe;
    logic [LW-1:0] lane;
    logic          two;
  } ofs_meta_t;

  typedef struct packed {
    vid_t          vid;
    logic [PW-1:0] pe;
    vid_t          lo;
    vid_t          hi;
  } ofs_res_t;

  logic [PW-1:0] rr_last, pick;
  logic          any_req;
  always_comb begin
    any_req = 1'b0;
    pick    = '0;
    for (int k = 1; k <= PE_PER_PG; k++) begin
      int unsigned c;
      c = (int'(rr_last) + k) % PE_PER_PG;
      if (!any_req && req_valid[c]) begin
        any_req = 1'b1;
        pick    = PW'(c);
      end
    end
  end

  addr_t          ofs_addr;
  logic [LW-1:0]  ofs_lane;
  always_comb begin
    ofs_addr = ((mode == MODE_PUSH) ? base[pick].csr_off : base[pick].csc_off) +
               addr_t'((req_vid[pick] / Q) * 4);
    ofs_lane = LW'((ofs_addr / 4) % LANES);
  end

  logic       om_in_valid, om_in_ready, om_out_valid, om_out_ready;
  ofs_meta_t  om_in, om_out;
  logic [CNTW-1:0] om_count, or_count;
  logic       or_in_valid, or_in_ready, or_out_valid, or_out_ready;
  ofs_res_t   or_in, or_out;

  wire ofs_credit = (om_count + or_count) < CNTW'(DEPTH);

  // edge AR (declared here for AR arbitration)
  logic   e_ar_valid;
  addr_t  e_ar_addr;
  logic [AXI_LW-1:0] e_ar_len;

  wire o_ar_valid = any_req && ofs_credit && om_in_ready;
  assign ar_valid = e_ar_valid || o_ar_valid;
  assign ar_id    = e_ar_valid;
  assign ar_addr  = e_ar_valid ? e_ar_addr : (ofs_addr & ~addr_t'(BEAT_B - 1));
  assign ar_len   = e_ar_valid ? e_ar_len  : ((ofs_lane == LW'(LANES - 1)) ? AXI_LW'(1) : AXI_LW'(0));

  wire o_ar_fire = o_ar_valid && !e_ar_valid && ar_ready;
  always_comb begin
    req_ready = '0;
    req_ready[pick] = o_ar_fire;
  end
  assign om_in_valid = o_ar_fire;
  assign om_in       = '{vid: req_vid[pick], pe: pick, lane: ofs_lane,
                         two: (ofs_lane == LW'(LANES - 1))};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rr_last <= PW'(PE_PER_PG - 1);
    else if (o_ar_fire) rr_last <= pick;
  end

  sync_fifo #(.WIDTH($bits(ofs_meta_t)), .DEPTH(DEPTH)) u_ofs_meta (
    .clk, .rst_n, .in_valid(om_in_valid), .in_ready(om_in_ready), .in_data(om_in),
    .out_valid(om_out_valid), .out_ready(om_out_ready), .out_data(om_out), .count(om_count));

  sync_fifo #(.WIDTH($bits(ofs_res_t)), .DEPTH(DEPTH)) u_ofs_res (
    .clk, .rst_n, .in_valid(or_in_valid), .in_ready(or_in_ready), .in_data(or_in),
    .out_valid(or_out_valid), .out_ready(or_out_ready), .out_data(or_out), .count(or_count));

  // -------------------------------------------------------------- offset R
  function automatic vid_t lane_word(input logic [DW-1:0] d, input int unsigned l);
    return d[l*32 +: 32];
  endfunction

  logic second;   // waiting for the second beat of a straddling pair
  vid_t lo_q;
  wire  r_ofs = r_valid && (r_id == 1'b0);
  always_comb begin
    or_in_valid  = 1'b0;
    or_in        = '{vid: om_out.vid, pe: om_out.pe, lo: '0, hi: '0};
    om_out_ready = 1'b0;
    if (r_ofs) begin
      if (second) begin
        or_in_valid  = 1'b1;
        or_in.lo     = lo_q;
        or_in.hi     = lane_word(r_data, 0);
        om_out_ready = 1'b1;
      end else if (!om_out.two) begin
        or_in_valid  = 1'b1;
        or_in.lo     = lane_word(r_data, om_out.lane);
        or_in.hi     = lane_word(r_data, int'(om_out.lane) + 1);
        om_out_ready = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      second <= 1'b0;
      lo_q   <= '0;
    end else if (r_ofs) begin
      if (!second && om_out.two) begin
        second <= 1'b1;
        lo_q   <= lane_word(r_data, LANES - 1);
      end else begin
        second <= 1'b0;
      end
    end
  end

  // -------------------------------------------------------------- edge AR
  typedef struct packed {
    vid_t          vid;
    logic [LW-1:0] first_lane;
    logic [LW-1:0] last_lane;
    logic [AXI_LW:0] beats;
  } edge_meta_t;

  logic       em_in_valid, em_in_ready, em_out_valid, em_out_ready;
  edge_meta_t em_in, em_out;

  logic   e_act;     // a neighbour list is being cut into bursts
  vid_t   e_cur;     // next edge index to read
  addr_t  e_addr, e_last_addr;
  logic [AXI_AW-1:0] b0, bl, bnd, bend;   // beat numbers
  addr_t  e_base;

  assign e_base      = (mode == MODE_PUSH) ? base[or_out.pe].csr_edge : base[or_out.pe].csc_edge;
  assign e_addr      = e_base + addr_t'(e_cur) * 4;
  assign e_last_addr = e_base + (addr_t'(or_out.hi) - 1) * 4;

  always_comb begin
    b0   = e_addr / BEAT_B;
    bl   = e_last_addr / BEAT_B;
    // last beat before the next 1 KB boundary, capped by MAX_BURST
    bnd  = ((b0 / (1024 / BEAT_B)) + 1) * (1024 / BEAT_B) - 1;
    if (bnd > b0 + MAX_BURST - 1) bnd = b0 + MAX_BURST - 1;
    bend = (bl < bnd) ? bl : bnd;
  end

  wire e_empty_list = or_out_valid && (or_out.lo == or_out.hi);
  assign e_ar_valid = e_act && em_in_ready;
  assign e_ar_addr  = b0 * BEAT_B;
  assign e_ar_len   = AXI_LW'(bend - b0);
  wire   e_ar_fire  = e_ar_valid && ar_ready;
  wire   e_final    = (bend == bl);

  assign em_in_valid = e_ar_fire;
  assign em_in = '{vid: or_out.vid,
                   first_lane: LW'((e_addr / 4) % LANES),
                   last_lane:  e_final ? LW'((e_last_addr / 4) % LANES) : LW'(LANES - 1),
                   beats: (AXI_LW+1)'(bend - b0 + 1)};
  assign or_out_ready = e_empty_list || (e_ar_fire && e_final);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_act <= 1'b0;
      e_cur <= '0;
    end else if (!e_act) begin
      if (or_out_valid && !e_empty_list) begin
        e_act <= 1'b1;
        e_cur <= or_out.lo;
      end
    end else if (e_ar_fire) begin
      if (e_final) e_act <= 1'b0;
      else         e_cur <= vid_t'(((bend + 1) * BEAT_B - e_base) / 4);
    end
  end

  sync_fifo #(.WIDTH($bits(edge_meta_t)), .DEPTH(DEPTH)) u_edge_meta (
    .clk, .rst_n, .in_valid(em_in_valid), .in_ready(em_in_ready), .in_data(em_in),
    .out_valid(em_out_valid), .out_ready(em_out_ready), .out_data(em_out), .count());

  // -------------------------------------------------------------- edge R + unpacker
  logic [AXI_LW:0] e_beat;       // beat index within the current burst
  logic [LANES-1:0] u_mask, u_take, u_left;
  logic [DW-1:0]    u_data;
  vid_t             u_vid;
  logic             u_accept;
  logic [LANES-1:0] new_mask;

  wire r_edge = r_valid && (r_id == 1'b1);

  // per port: lowest remaining lane of its class (u_first marks it)
  logic [LANES-1:0] u_first;
  always_comb begin
    u_first = '0;
    for (int j = 0; j < PE_PER_PG; j++) begin
      logic found;
      found        = 1'b0;
      out_valid[j] = 1'b0;
      out_msg[j]   = '{vid: '0, aux: u_vid};
      for (int l = j; l < LANES; l += PE_PER_PG) begin
        if (!found && u_mask[l]) begin
          found        = 1'b1;
          out_valid[j] = 1'b1;
          out_msg[j]   = '{vid: lane_word(u_data, l), aux: u_vid};
          u_first[l]   = 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) u_take[l] = u_first[l] && out_ready[l % PE_PER_PG];
    u_left   = u_mask & ~u_take;
    u_accept = (u_left == '0);
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      new_mask[l] = ((e_beat != '0) || (LW'(l) >= em_out.first_lane)) &&
                    ((e_beat + 1'b1 != em_out.beats) || (LW'(l) <= em_out.last_lane));
  end

  assign r_ready      = (r_id == 1'b0) ? 1'b1 : u_accept;
  assign em_out_ready = r_edge && u_accept && (e_beat + 1'b1 == em_out.beats);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_beat <= '0;
      u_mask <= '0;
      u_data <= '0;
      u_vid  <= '0;
    end else begin
      if (r_edge && u_accept) begin
        u_mask <= new_mask;
        u_data <= r_data;
        u_vid  <= em_out.vid;
        e_beat <= (e_beat + 1'b1 == em_out.beats) ? '0 : e_beat + 1'b1;
      end else begin
        u_mask <= u_left;
      end
    end
  end

  assign busy = om_out_valid || or_out_valid || em_out_valid || e_act || (u_mask != '0);

  // An offset answer always finds room; edge data only arrives for an issued burst.
  assert property (@(posedge clk) disable iff (!rst_n) (r_ofs |-> or_in_ready || (!second && om_out.two)));
  assert property (@(posedge clk) disable iff (!rst_n) (r_valid && r_id |-> em_out_valid));
  assert property (@(posedge clk) disable iff (!rst_n)
                   (r_valid && r_id && r_ready |-> r_last == (e_beat + 1'b1 == em_out.beats)));
endmodule
