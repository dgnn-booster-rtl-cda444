// tb_dgnn_v2: end-to-end test of the V2 (GCRN-M2) engine at reduced size
// (F = 4, 64 nodes, 128 edges), three snapshots; see dgnn_harness.
module tb_dgnn_v2;
  dgnn_harness #(.ENGINE(2), .F(4), .MAXN(64), .MAXE(128), .T(3), .NBASE(8)) u_h ();
endmodule
