// Shared constants and types of the BFS accelerator.
//
// A vertex is stored in 32 bits in the graph data held in HBM (S_v = 32), and
// vertex messages that travel through the crossbars carry two such IDs: the
// vertex used for routing (`vid`) and an auxiliary vertex (`aux`), which in
// pull mode is the unvisited child whose incoming list is being read.
// The level width (8 bits, all ones meaning "not reached") and the 33-bit
// AXI byte address (8 GB of HBM) are choices of this design.
package scalabfs_pkg;

  localparam int unsigned VID_W   = 32;  // storage size of a vertex
  localparam int unsigned LEVEL_W = 8;   // level value width
  localparam int unsigned AXI_AW  = 33;  // byte address over the whole HBM
  localparam int unsigned AXI_LW  = 8;   // AXI4 burst length field
  localparam int unsigned BM_W    = 32;  // bitmap word width

  typedef logic [VID_W-1:0]   vid_t;
  typedef logic [LEVEL_W-1:0] level_t;
  typedef logic [AXI_AW-1:0]  addr_t;

  localparam level_t LEVEL_INF = '1;

  // Processing mode of one BFS iteration.
  typedef enum logic {
    MODE_PUSH = 1'b0,
    MODE_PULL = 1'b1
  } mode_e;

  // Mode policy chosen by the host.
  typedef enum logic [1:0] {
    POLICY_HYBRID = 2'd0,
    POLICY_PUSH   = 2'd1,
    POLICY_PULL   = 2'd2
  } policy_e;

  // A vertex message routed by `vid`.
  typedef struct packed {
    vid_t vid;
    vid_t aux;
  } vmsg_t;

  // Where the subgraph of one PE lives in its HBM pseudo channel.
  typedef struct packed {
    addr_t csr_off;   // CSR offset array (|local vertices|+1 words)
    addr_t csr_edge;  // CSR edge array (outgoing neighbours)
    addr_t csc_off;   // CSC offset array
    addr_t csc_edge;  // CSC edge array (incoming neighbours)
  } sg_base_t;

  // Commands from the scheduler to every PE.
  typedef enum logic [2:0] {
    CMD_NONE  = 3'd0,
    CMD_INIT  = 3'd1,  // clear all bitmaps of the first `num_vertices`, then set the root
    CMD_ITER  = 3'd2,  // run P1 over the bitmaps in the given mode
    CMD_SWAP  = 3'd3   // swap frontiers; clear the old one when it was not cleared by P1
  } cmd_e;

endpackage
