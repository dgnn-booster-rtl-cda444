// tb_dgnn_v1: end-to-end test of the V1 (EvolveGCN) engine at reduced size
// (F = 4, 64 nodes, 128 edges), three snapshots; see dgnn_harness.
module tb_dgnn_v1;
  dgnn_harness #(.ENGINE(1), .F(4), .MAXN(64), .MAXE(128), .T(3), .NBASE(8)) u_h ();
endmodule
