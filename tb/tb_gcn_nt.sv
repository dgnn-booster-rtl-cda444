// tb_gcn_nt: node transformation of random vectors by a random F x FO
// weight matrix (asynchronous row reads), with ReLU on and off and random
// input/output handshake timing. Results are compared with double-precision
// products; with the output always ready each node takes F+2 cycles.
module tb_gcn_nt;
  import dgnn_pkg::*;
  import tb_fp_pkg::*;
  localparam int F = FEAT, FO = 8, MAXN = 64, NW = $clog2(MAXN + 1), FW = $clog2(F);
  logic clk = 0, rst_n = 0;
  logic relu_en, busy, in_valid, in_ready, out_valid, out_ready;
  logic [NW-1:0] in_node, out_node;
  logic [F-1:0][31:0] in_vec;
  logic [FW-1:0] w_addr;
  logic [FO-1:0][31:0] w_row, out_vec;
  logic [FO-1:0][31:0] w [F];
  logic [F-1:0][31:0] vecs [MAXN];
  int checks = 0, failures = 0, n_out = 0, rdy_pct = 50;

  gcn_nt #(.F(F), .FO(FO), .MAXN(MAXN)) dut (.*);
  always #5 clk = ~clk;
  assign w_row = w[w_addr];
  always @(posedge clk) out_ready <= ($urandom_range(0, 99) < rdy_pct);

  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    for (int o = 0; o < FO; o++) begin
      real want;
      want = 0.0;
      for (int f = 0; f < F; f++) want += fp2r(vecs[out_node][f]) * fp2r(w[f][o]);
      if (relu_en) want = r_relu(want);
      checks++;
      if (!near(out_vec[o], want, 1e-5, 1e-5)) begin
        failures++; $display("FAIL node %0d o %0d got %g want %g", out_node, o, fp2r(out_vec[o]), want);
      end
    end
    n_out++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, bit relu, int pct);
    int cyc;
    relu_en = relu; rdy_pct = pct; n_out = 0;
    for (int f = 0; f < F; f++) for (int o = 0; o < FO; o++) w[f][o] = rnd_fp(1.0);
    for (int v = 0; v < n; v++) for (int f = 0; f < F; f++) vecs[v][f] = rnd_fp(2.0);
    cyc = 0;
    for (int v = 0; v < n; v++) begin
      @(negedge clk);
      while ($urandom_range(0, 99) < 100 - pct) @(negedge clk);
      in_valid = 1; in_node = NW'(v); in_vec = vecs[v];
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk); in_valid = 0;
    end
    while (n_out < n) begin @(negedge clk); cyc++; if (cyc > 10000) break; end
    checks++;
    if (n_out != n) begin failures++; $display("FAIL %0d of %0d out", n_out, n); end
  endtask

  initial begin
    int t0;
    in_valid = 0; in_node = 0; in_vec = '0; relu_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(20, 1'b1, 50);
    run(20, 1'b0, 70);
    // latency: accepted at one edge, result offered F+1 edges later
    rdy_pct = 100; relu_en = 1;
    @(negedge clk); in_valid = 1; in_node = 0; in_vec = vecs[0];
    @(posedge clk); t0 = 0;
    @(negedge clk); in_valid = 0;
    while (!out_valid) begin @(negedge clk); t0++; end
    checks++;
    if (t0 != F) begin failures++; $display("FAIL latency %0d want %0d", t0, F); end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
