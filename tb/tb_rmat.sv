// Workload test: BFS on a synthetic RMAT graph of the kind used to evaluate
// the design (Kronecker generator, A = 0.57, B = 0.19, C = 0.19, every
// undirected edge stored in both directions), scaled down to 2^14 vertices
// with edge factor 16 (about 520 K directed edges) so that it simulates in
// seconds. The accelerator runs at a reduced size of 4 groups of 4 PEs with
// a 2-layer 4 x 4 dispatcher. Every vertex level of four searches is
// compared with a reference BFS, and the mechanism counts of bfs_env apply.
module tb_rmat;
  bfs_env #(.NUM_PG(4), .NUM_PE(16), .XBAR_C(4), .XBAR_K(2), .VPP(1024),
            .FULL(1'b0), .NV(16384), .RMAT_SCALE(14), .RMAT_EF(16),
            .WORDS(524288)) env ();

  // overall time limit (bfs_env has its own cycle watchdog as well)
  initial begin
    #2_000_000_000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
