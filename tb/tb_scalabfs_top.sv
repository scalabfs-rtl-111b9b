// End-to-end test of the accelerator at a reduced size: 4 processing groups
// of 4 PEs (16 PEs), a 2-layer 4 x 4 dispatcher, 1024 vertices per PE, on a
// random 2000-vertex graph. See bfs_env for what is checked.
module tb_scalabfs_top;
  bfs_env #(.NUM_PG(4), .NUM_PE(16), .XBAR_C(4), .XBAR_K(2), .VPP(1024),
            .FULL(1'b0), .NV(2000)) env ();
endmodule
