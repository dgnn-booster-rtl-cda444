// dgnn_harness: end-to-end test bench body for dgnn_v1, dgnn_v2 and the
// dgnn_booster top.
//
// It plays the host: writes the weights, T snapshots (descriptor, COO edge
// list with a self loop per node plus random edges, renumbering table,
// embedding tables) into a DRAM model with random stalls, starts the engine
// and compares what the engine wrote back with a double-precision model of
// the same network (same piecewise-linear activations):
//   V1: W_{s+1} = LSTM(W_s); out_s = ReLU(sum_e e*x_src * W_{s+1})
//   V2: per node, gates = conv(X)*W_x + conv(H)*W_h + b, peephole LSTM on C
// ENGINE 0 runs the top twice, V1 then V2 (the mode switch); 1 runs dgnn_v1,
// 2 runs dgnn_v2. It also counts how often each mechanism of the dataflow
// happened (overlapped phases, ping-pong swaps, RNN stage streaming, GNN and
// RNN working on different nodes, renumbered gathers, format conversions,
// DRAM back-pressure, GNN stalled by a full node queue while the writes
// back-pressure the TP PE) and counts a failure for any that never did.
module dgnn_harness
  import dgnn_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter int ENGINE = 0,
  parameter int F      = FEAT,
  parameter int MAXN   = MAX_NODES,
  parameter int MAXE   = MAX_EDGES,
  parameter int T      = 3,
  parameter int NBASE  = 8,
  parameter int WRSTALL = 80     // percent of cycles the DRAM refuses a write
) ();
  localparam int H = F, RAWN = 41;
  localparam int WB = 0, DB = 1000, EB = 2000, RB = 4000, XB = 6000, OB = 9000, HB = 12000, CB = 13000;

  logic clk = 0, rst_n = 0;
  logic start, mode, busy, done;
  logic [15:0] n_snap;
  logic [ADDR_W-1:0] desc_base, wparam_base;
  logic rq_valid, rq_ready, rs_valid, wr_valid, wr_ready;
  logic [ADDR_W-1:0] rq_addr, wr_addr;
  logic [DRAM_W-1:0] rs_data, wr_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dram_model #(.DEPTH(16384), .WR_STALL_PCT(WRSTALL)) u_dram (.*);

  // ------------------------------------------------------------ DUT and probes
  logic v1_mp_rnn, v1_nt_gl, v1_wswap, v1_stream, v2_overlap, v2_gl, v2_csc, v1_csc, v2_qstall;
  if (ENGINE == 0) begin : g_top
    dgnn_booster u_dut (.*);
    assign v1_mp_rnn  = u_dut.u_v1.mp_busy && u_dut.u_v1.rnn_busy;
    assign v1_nt_gl   = u_dut.u_v1.nt_busy && u_dut.u_v1.gl_busy;
    assign v1_wswap   = u_dut.u_v1.rnn_start;
    assign v1_stream  = u_dut.u_v1.u_rnn.g_stage[0].st != 0 && u_dut.u_v1.u_rnn.g_stage[3].st != 0;
    assign v1_csc     = u_dut.u_v1.csc_done;
    assign v2_overlap = u_dut.u_v2.tp_busy && (u_dut.u_v2.mp_busy[0] || u_dut.u_v2.nt_busy[0]);
    assign v2_gl      = u_dut.u_v2.emb_we;
    assign v2_csc     = u_dut.u_v2.csc_done;
    assign v2_qstall  = |u_dut.u_v2.q_stall;
  end else if (ENGINE == 1) begin : g_v1
    dgnn_v1 #(.F(F), .MAXN(MAXN), .MAXE(MAXE)) u_dut (
      .clk, .rst_n, .start, .n_snap, .desc_base, .wparam_base, .busy, .done,
      .rq_valid, .rq_ready, .rq_addr, .rs_valid, .rs_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);
    assign v1_mp_rnn  = u_dut.mp_busy && u_dut.rnn_busy;
    assign v1_nt_gl   = u_dut.nt_busy && u_dut.gl_busy;
    assign v1_wswap   = u_dut.rnn_start;
    assign v1_stream  = u_dut.u_rnn.g_stage[0].st != 0 && u_dut.u_rnn.g_stage[3].st != 0;
    assign v1_csc     = u_dut.csc_done;
    assign v2_overlap = 1'b0;
    assign v2_gl      = 1'b0;
    assign v2_csc     = 1'b0;
    assign v2_qstall  = 1'b0;
  end else begin : g_v2
    dgnn_v2 #(.F(F), .MAXN(MAXN), .MAXE(MAXE)) u_dut (
      .clk, .rst_n, .start, .n_snap, .desc_base, .wparam_base, .busy, .done,
      .rq_valid, .rq_ready, .rq_addr, .rs_valid, .rs_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);
    assign v2_overlap = u_dut.tp_busy && (u_dut.mp_busy[0] || u_dut.nt_busy[0]);
    assign v2_gl      = u_dut.emb_we;
    assign v2_csc     = u_dut.csc_done;
    assign v2_qstall  = |u_dut.q_stall;
    assign v1_mp_rnn  = 1'b0;
    assign v1_nt_gl   = 1'b0;
    assign v1_wswap   = 1'b0;
    assign v1_stream  = 1'b0;
    assign v1_csc     = 1'b0;
  end

  int n_mp_rnn = 0, n_nt_gl = 0, n_wswap = 0, n_stream = 0, n_v2_overlap = 0, n_gather = 0, n_csc = 0, n_qstall = 0;
  always @(posedge clk) if (rst_n) begin
    if (v1_mp_rnn)  n_mp_rnn++;
    if (v1_nt_gl)   n_nt_gl++;
    if (v1_wswap)   n_wswap++;
    if (v1_stream)  n_stream++;
    if (v2_overlap) n_v2_overlap++;
    if (v2_gl)      n_gather++;
    if (v2_qstall)  n_qstall++;
    if (v1_csc || v2_csc) n_csc++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host data
  int   nn [T];
  int   ne [T];
  int   rid [T][64];
  int   esrc [T][256];
  int   edst [T][256];
  real  eval_ [T][256];
  real  x [T][RAWN][F];

  function automatic logic [DRAM_W-1:0] row_bits(real v [F]);
    logic [DRAM_W-1:0] w;
    w = '0;
    for (int i = 0; i < F; i++) w[i*32 +: 32] = r2fp(v[i]);
    return w;
  endfunction

  function automatic real rnd(real range);
    return fp2r(rnd_fp(range));
  endfunction

  task automatic make_graphs();
    for (int s = 0; s < T; s++) begin
      snap_desc_t d;
      nn[s] = NBASE + 2 * s;
      ne[s] = 0;
      for (int i = 0; i < nn[s]; i++) rid[s][i] = (s * 7 + i * 3) % RAWN;
      for (int i = 0; i < nn[s]; i++) begin
        esrc[s][ne[s]] = i; edst[s][ne[s]] = i; eval_[s][ne[s]] = 0.5; ne[s]++;
      end
      for (int k = 0; k < 2 * nn[s]; k++) begin
        esrc[s][ne[s]] = $urandom_range(0, nn[s] - 1);
        edst[s][ne[s]] = $urandom_range(0, nn[s] - 1);
        eval_[s][ne[s]] = rnd(0.5);
        ne[s]++;
      end
      for (int k = 0; k < ne[s]; k++)
        u_dram.mem[EB + 300 * s + k] = DRAM_W'({r2fp(eval_[s][k]), 16'(edst[s][k]), 16'(esrc[s][k])});
      for (int i = 0; i < nn[s]; i++) u_dram.mem[RB + 100 * s + i] = DRAM_W'(rid[s][i]);
      for (int r = 0; r < RAWN; r++) begin
        real v [F];
        for (int f = 0; f < F; f++) begin x[s][r][f] = rnd(1.0); v[f] = x[s][r][f]; end
        u_dram.mem[XB + 100 * s + r] = row_bits(v);
      end
      d = '{c_base: CB, out_base: (ENGINE == 2 || mode) ? HB : OB + 100 * s, ne_base: XB + 100 * s,
            renum_base: RB + 100 * s, edge_base: EB + 300 * s, n_edges: ne[s], n_nodes: nn[s]};
      u_dram.mem[DB + s] = DRAM_W'(d);
    end
  endtask

  function automatic void aggregate(int s, real tab [RAWN][F], output real agg [64][F]);
    for (int v = 0; v < nn[s]; v++) for (int f = 0; f < F; f++) agg[v][f] = 0.0;
    for (int k = 0; k < ne[s]; k++)
      for (int f = 0; f < F; f++)
        agg[edst[s][k]][f] += eval_[s][k] * tab[rid[s][esrc[s][k]]][f];
  endfunction

  // ------------------------------------------------------------ V1 run
  task automatic run_v1();
    real W [F][F];
    real C [F][F];
    real A [4][F][F];
    real B [4][F][F];
    real agg [64][F];
    int cyc;
    mode = 1'b0;
    for (int i = 0; i < F; i++) begin
      real v [F];
      for (int c = 0; c < F; c++) begin W[i][c] = rnd(0.8); C[i][c] = 0.0; v[c] = W[i][c]; end
      u_dram.mem[WB + i] = row_bits(v);
    end
    for (int g = 0; g < 4; g++) for (int i = 0; i < F; i++) begin
      real va [F];
      real vb [F];
      for (int k = 0; k < F; k++) begin
        A[g][i][k] = rnd(0.6 / $sqrt(real'(F))); va[k] = A[g][i][k];
        B[g][i][k] = rnd(0.3);                    vb[k] = B[g][i][k];
      end
      u_dram.mem[WB + F + g * F + i]     = row_bits(va);
      u_dram.mem[WB + 5 * F + g * F + i] = row_bits(vb);
    end
    make_graphs();
    @(negedge clk); start = 1; n_snap = 16'(T); desc_base = DB; wparam_base = WB;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("V1: %0d snapshots in %0d cycles", T, cyc);
    for (int s = 0; s < T; s++) begin
      real Wn [F][F];
      for (int i = 0; i < F; i++) for (int c = 0; c < F; c++) begin
        real p [4];
        for (int g = 0; g < 4; g++) begin
          p[g] = B[g][i][c];
          for (int k = 0; k < F; k++) p[g] += A[g][i][k] * W[k][c];
        end
        C[i][c]  = r_sig(p[1]) * C[i][c] + r_sig(p[0]) * r_tanh(p[2]);
        Wn[i][c] = r_sig(p[3]) * r_tanh(C[i][c]);
      end
      W = Wn;
      aggregate(s, x[s], agg);
      for (int v = 0; v < nn[s]; v++)
        for (int o = 0; o < F; o++) begin
          real want;
          want = 0.0;
          for (int f = 0; f < F; f++) want += agg[v][f] * W[f][o];
          want = r_relu(want);
          checks++;
          if (!near(u_dram.mem[OB + 100 * s + rid[s][v]][o*32 +: 32], want, 2e-3, 2e-3)) begin
            failures++;
            $display("FAIL V1 s%0d node %0d o%0d got %g want %g", s, v, o,
                     fp2r(u_dram.mem[OB + 100 * s + rid[s][v]][o*32 +: 32]), want);
          end
        end
    end
  endtask

  // ------------------------------------------------------------ V2 run
  task automatic run_v2();
    real Wx [F][4*H];
    real Wh [F][4*H];
    real b [4*H];
    real pp [4*H];
    real hs [RAWN][F];
    real cs [RAWN][F];
    real a1 [64][F];
    real a2 [64][F];
    int cyc;
    mode = 1'b1;
    for (int f = 0; f < F; f++) for (int l = 0; l < 4 * H; l++) begin
      Wx[f][l] = rnd(0.8 / $sqrt(real'(F))); Wh[f][l] = rnd(0.8 / $sqrt(real'(F)));
    end
    for (int l = 0; l < 4 * H; l++) begin b[l] = rnd(0.3); pp[l] = rnd(0.3); end
    for (int f = 0; f < F; f++) for (int g = 0; g < 4; g++) begin
      real vx [F];
      real vh [F];
      for (int j = 0; j < H; j++) begin vx[j] = Wx[f][g*H + j]; vh[j] = Wh[f][g*H + j]; end
      u_dram.mem[WB + 4 * f + g]         = row_bits(vx);
      u_dram.mem[WB + 4 * F + 4 * f + g] = row_bits(vh);
    end
    for (int g = 0; g < 4; g++) begin
      real vb [F];
      real vp [F];
      for (int j = 0; j < H; j++) begin vb[j] = b[g*H + j]; vp[j] = pp[g*H + j]; end
      u_dram.mem[WB + 8 * F + g]     = row_bits(vb);
      u_dram.mem[WB + 8 * F + 4 + g] = row_bits(vp);
    end
    for (int r = 0; r < RAWN; r++) begin
      real vh [F];
      real vc [F];
      for (int j = 0; j < H; j++) begin hs[r][j] = rnd(0.5); cs[r][j] = rnd(0.5); vh[j] = hs[r][j]; vc[j] = cs[r][j]; end
      u_dram.mem[HB + r] = row_bits(vh);
      u_dram.mem[CB + r] = row_bits(vc);
    end
    make_graphs();
    @(negedge clk); start = 1; n_snap = 16'(T); desc_base = DB; wparam_base = WB;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("V2: %0d snapshots in %0d cycles", T, cyc);
    for (int s = 0; s < T; s++) begin
      real hn [64][F];
      real cn [64][F];
      aggregate(s, x[s], a1);
      aggregate(s, hs, a2);
      for (int v = 0; v < nn[s]; v++) begin
        for (int j = 0; j < H; j++) begin
          real p [4];
          real c, ig, fg, og;
          for (int g = 0; g < 4; g++) begin
            p[g] = b[g*H + j];
            for (int f = 0; f < F; f++) p[g] += a1[v][f] * Wx[f][g*H + j] + a2[v][f] * Wh[f][g*H + j];
          end
          c  = cs[rid[s][v]][j];
          ig = r_sig(p[0] + pp[j] * c);
          fg = r_sig(p[1] + pp[H + j] * c);
          cn[v][j] = fg * c + ig * r_tanh(p[2]);
          og = r_sig(p[3] + pp[3*H + j] * cn[v][j]);
          hn[v][j] = og * r_tanh(cn[v][j]);
        end
      end
      for (int v = 0; v < nn[s]; v++) for (int j = 0; j < H; j++) begin
        hs[rid[s][v]][j] = hn[v][j];
        cs[rid[s][v]][j] = cn[v][j];
      end
    end
    for (int r = 0; r < RAWN; r++) for (int j = 0; j < H; j++) begin
      checks += 2;
      if (!near(u_dram.mem[HB + r][j*32 +: 32], hs[r][j], 2e-3, 2e-3)) begin
        failures++; $display("FAIL V2 h raw %0d j%0d got %g want %g", r, j, fp2r(u_dram.mem[HB + r][j*32 +: 32]), hs[r][j]);
      end
      if (!near(u_dram.mem[CB + r][j*32 +: 32], cs[r][j], 2e-3, 2e-3)) begin
        failures++; $display("FAIL V2 c raw %0d j%0d got %g want %g", r, j, fp2r(u_dram.mem[CB + r][j*32 +: 32]), cs[r][j]);
      end
    end
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    $display("  %-40s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    start = 0; mode = 0; n_snap = 0; desc_base = 0; wparam_base = 0;
    repeat (10) @(posedge clk);   // longer than the DRAM latency
    rst_n = 1;
    if (ENGINE != 2) run_v1();
    if (ENGINE != 1) run_v2();
    $display("mechanisms:");
    if (ENGINE != 2) begin
      expect_seen("V1 MP(s) overlapped with RNN(s+1), cycles", n_mp_rnn);
      expect_seen("V1 NT(s) overlapped with GL(s+1), cycles", n_nt_gl);
      expect_seen("V1 weight evolutions (ping-pong swaps)", n_wswap);
      expect_seen("V1 RNN stages 1 and 4 busy together", n_stream);
    end
    if (ENGINE != 1) begin
      expect_seen("V2 TP PE busy while GNN busy, cycles", n_v2_overlap);
      expect_seen("V2 renumbered gathers (X, H, C rows)", n_gather);
      expect_seen("V2 GNN stalled on a full node queue, cycles", n_qstall);
    end
    expect_seen("COO-to-CSC conversions", n_csc);
    expect_seen("DRAM read back-pressure cycles", u_dram.n_rd_stall);
    expect_seen("DRAM write back-pressure cycles", u_dram.n_wr_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
