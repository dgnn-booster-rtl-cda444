// tb_tp_pe: feeds the two node queues with random gate pre-activations
// (the queues arriving at random, independent times) and checks the new
// hidden and cell state of every node against a double-precision peephole
// LSTM using the same piecewise-linear activations; the cell state is read
// from a one-cycle-latency buffer. With everything ready a node takes 3
// cycles.
module tb_tp_pe;
  import dgnn_pkg::*;
  import tb_fp_pkg::*;
  localparam int H = 4, MAXN = 32, NW = $clog2(MAXN + 1), N = 24;
  logic clk = 0, rst_n = 0;
  logic busy, q1_valid, q1_ready, q2_valid, q2_ready, c_re, o_valid, o_ready;
  logic [NW-1:0] q1_node, q2_node, c_addr, o_node;
  logic [4*H-1:0][31:0] q1_vec, q2_vec, bias, peep;
  logic [H-1:0][31:0] c_data, o_h, o_c;
  logic [4*H-1:0][31:0] g1 [N];
  logic [4*H-1:0][31:0] g2 [N];
  logic [H-1:0][31:0] cbuf [MAXN];
  int checks = 0, failures = 0, n_out = 0, i1 = 0, i2 = 0, rdy = 70;

  tp_pe #(.H(H), .MAXN(MAXN)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) c_data <= cbuf[c_addr];

  // queue drivers and output ready, changed at each rising edge
  always @(posedge clk) begin
    if (q1_valid && q1_ready) i1 <= i1 + 1;
    if (q2_valid && q2_ready) i2 <= i2 + 1;
    q1_valid <= rst_n && (i1 < N) && ($urandom_range(0, 99) < rdy);
    q2_valid <= rst_n && (i2 < N) && ($urandom_range(0, 99) < rdy);
    o_ready  <= ($urandom_range(0, 99) < rdy);
  end
  assign q1_node = NW'(i1);
  assign q2_node = NW'(i2);
  assign q1_vec  = g1[i1 % N];
  assign q2_vec  = g2[i2 % N];

  always @(negedge clk) if (rst_n && o_valid && o_ready) begin
    for (int j = 0; j < H; j++) begin
      real c, pi, pf, pg, po, ig, fg, cn, hn;
      c  = fp2r(cbuf[o_node][j]);
      pi = fp2r(g1[o_node][j])       + fp2r(g2[o_node][j])       + fp2r(bias[j]);
      pf = fp2r(g1[o_node][H+j])     + fp2r(g2[o_node][H+j])     + fp2r(bias[H+j]);
      pg = fp2r(g1[o_node][2*H+j])   + fp2r(g2[o_node][2*H+j])   + fp2r(bias[2*H+j]);
      po = fp2r(g1[o_node][3*H+j])   + fp2r(g2[o_node][3*H+j])   + fp2r(bias[3*H+j]);
      ig = r_sig(pi + fp2r(peep[j]) * c);
      fg = r_sig(pf + fp2r(peep[H+j]) * c);
      cn = fg * c + ig * r_tanh(pg);
      hn = r_sig(po + fp2r(peep[3*H+j]) * cn) * r_tanh(cn);
      checks += 2;
      if (!near(o_c[j], cn, 1e-5, 1e-5)) begin failures++; $display("FAIL c node %0d", o_node); end
      if (!near(o_h[j], hn, 1e-5, 1e-5)) begin failures++; $display("FAIL h node %0d", o_node); end
    end
    checks++;
    if (o_node != NW'(n_out)) begin failures++; $display("FAIL order %0d want %0d", o_node, n_out); end
    n_out++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    q1_valid = 0; q2_valid = 0; o_ready = 0;
    for (int l = 0; l < 4 * H; l++) begin bias[l] = rnd_fp(0.5); peep[l] = rnd_fp(0.5); end
    for (int v = 0; v < N; v++) for (int l = 0; l < 4 * H; l++) begin g1[v][l] = rnd_fp(1.5); g2[v][l] = rnd_fp(1.5); end
    for (int v = 0; v < MAXN; v++) for (int j = 0; j < H; j++) cbuf[v][j] = rnd_fp(1.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_out < N) @(negedge clk);
    checks++;
    if (i1 != N || i2 != N) begin failures++; $display("FAIL queue pops"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
