// Workload test at the default size of the accelerator (32 groups, 64 PEs,
// 3-layer 4 x 4 dispatcher, 131,072 vertices per PE; no parameter is set on
// the top): BFS on a synthetic RMAT graph (Kronecker generator, A = 0.57,
// B = 0.19, C = 0.19, every undirected edge stored in both directions) of
// 2^15 vertices and edge factor 16, about 1 M directed edges. Every vertex
// level of four searches is compared with a reference BFS, and the
// mechanism counts of bfs_env apply.
module tb_rmat_full;
  bfs_env #(.NUM_PG(32), .NUM_PE(64), .XBAR_C(4), .XBAR_K(3), .VPP(131072),
            .FULL(1'b1), .NV(32768), .RMAT_SCALE(15), .RMAT_EF(16),
            .WORDS(131072)) env ();

  // overall time limit (bfs_env has its own cycle watchdog as well)
  initial begin
    #2_000_000_000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
