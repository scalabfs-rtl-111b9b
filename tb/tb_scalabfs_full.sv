// End-to-end test of the accelerator at its default size (32 processing
// groups, 64 PEs, 3-layer 4 x 4 dispatcher, 131072 vertices per PE), on a
// random 6000-vertex graph. See bfs_env for what is checked.
module tb_scalabfs_full;
  bfs_env #(.NUM_PG(32), .NUM_PE(64), .XBAR_C(4), .XBAR_K(3), .VPP(131072),
            .FULL(1'b1), .NV(6000), .HUB_DEG(900)) env ();
endmodule
