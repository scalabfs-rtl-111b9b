// Test of one processing group (two PEs and their HBM reader) in the
// smallest system around it: a single group whose two PEs are joined by a
// one-layer 2 x 2 dispatcher and soft crossbar, with the scheduler, 512
// vertices per PE and a random 900-vertex graph. Every vertex level of four
// BFS runs (hybrid, push-only, pull-only) is compared with a reference BFS,
// and each datapath mechanism of the group (dispatcher back pressure,
// pull-mode traffic, two-beat offset reads, 1 KB burst cuts, mode switches,
// duplicate hits in P3) must occur. See bfs_env for the details.
module tb_pg;
  bfs_env #(.NUM_PG(1), .NUM_PE(2), .XBAR_C(2), .XBAR_K(1), .VPP(512),
            .FULL(1'b0), .NV(900), .HUB_DEG(400)) env ();
endmodule
