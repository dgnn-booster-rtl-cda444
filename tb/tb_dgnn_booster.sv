// tb_dgnn_booster: end-to-end test of the top at its default sizes
// (F = 16, 1024 nodes, 2048 edges per snapshot): three snapshots through V1,
// then a mode switch and three snapshots through V2; see dgnn_harness.
module tb_dgnn_booster;
  dgnn_harness #(.ENGINE(0), .WRSTALL(95)) u_h ();
endmodule
