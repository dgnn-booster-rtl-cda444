// tb_gcn_mp: message passing over a random CSC graph held by the testbench
// (asynchronous CSC reads, one-cycle embedding reads). Every aggregated
// vector is compared with a double-precision sum over the node's incoming
// edges of edge value * source embedding, under random output back-pressure.
// A second run with the output always ready checks the cycle count:
// one cycle to take start, then per node 3 cycles plus 1 without edges or
// deg+2 with edges.
module tb_gcn_mp;
  import dgnn_pkg::*;
  import tb_fp_pkg::*;
  localparam int F = 4, MAXN = 32, MAXE = 128;
  localparam int NW = $clog2(MAXN + 1), EW = $clog2(MAXE + 1);
  logic clk = 0, rst_n = 0;
  logic start, busy, done, x_re, out_valid, out_ready;
  logic [NW-1:0] n_nodes, ptr_addr, x_addr, out_node;
  logic [EW-1:0] ptr_data, e_addr;
  logic [15:0] e_src;
  logic [31:0] e_val;
  logic [F-1:0][31:0] x_data, out_vec;
  logic [EW-1:0] ptr [MAXN+1];
  logic [15:0]   src [MAXE];
  logic [31:0]   val [MAXE];
  logic [F-1:0][31:0] x [MAXN];
  int checks = 0, failures = 0, n_out = 0, rdy_pct = 60;

  gcn_mp #(.F(F), .MAXN(MAXN), .MAXE(MAXE)) dut (.*);
  always #5 clk = ~clk;

  assign ptr_data = ptr[ptr_addr];
  assign e_src    = src[e_addr];
  assign e_val    = val[e_addr];
  always_ff @(posedge clk) x_data <= x[x_addr];
  always @(posedge clk) out_ready <= ($urandom_range(0, 99) < rdy_pct);

  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    for (int f = 0; f < F; f++) begin
      real want;
      want = 0.0;
      for (int k = int'(ptr[out_node]); k < int'(ptr[out_node + 1]); k++)
        want += fp2r(val[k]) * fp2r(x[src[k]][f]);
      checks++;
      if (!near(out_vec[f], want, 1e-5, 1e-5)) begin
        failures++; $display("FAIL node %0d f %0d got %g want %g", out_node, f, fp2r(out_vec[f]), want);
      end
    end
    checks++;
    if (out_node != NW'(n_out)) begin failures++; $display("FAIL order"); end
    n_out++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int e, int pct);
    int cyc, want_cyc, deg;
    rdy_pct = pct;
    ptr[0] = 0;
    want_cyc = 1;   // the cycle that takes start
    for (int v = 0; v < n; v++) begin
      deg = (v % 5 == 3) ? 0 : $urandom_range(1, 2 * e / n);
      if (int'(ptr[v]) + deg > e) deg = e - int'(ptr[v]);
      ptr[v + 1] = ptr[v] + EW'(deg);
      want_cyc += 3 + ((deg == 0) ? 1 : deg + 2);
    end
    for (int k = 0; k < MAXE; k++) begin src[k] = 16'($urandom_range(0, n - 1)); val[k] = rnd_fp(1.0); end
    for (int v = 0; v < MAXN; v++) for (int f = 0; f < F; f++) x[v][f] = rnd_fp(2.0);
    n_out = 0;
    @(negedge clk); start = 1; n_nodes = NW'(n);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (n_out != n) begin failures++; $display("FAIL %0d nodes out", n_out); end
    if (pct == 100) begin
      checks++;
      if (cyc != want_cyc) begin failures++; $display("FAIL cycles %0d want %0d", cyc, want_cyc); end
    end
  endtask

  initial begin
    start = 0; n_nodes = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(20, 60, 60);
    run(32, 120, 100);
    run(9, 20, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
