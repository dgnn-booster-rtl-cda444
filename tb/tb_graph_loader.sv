// tb_graph_loader: loads a snapshot (descriptor, COO edges, renumbering
// table and three embedding tables) from a DRAM model with random stalls and
// checks every buffer write: edges in order to the converter, raw ids to the
// raw-id buffer, and for every local node i and table k the DRAM row at
// table_base_k + raw_id[i] to slot i of table k. Also checks that the
// converter is started once, that done waits for it, and that the CSC it
// built holds all edges. Then loads a second snapshot to check the restart.
module tb_graph_loader;
  import dgnn_pkg::*;
  localparam int F = FEAT, MAXN = 64, MAXE = 128;
  localparam int NW = $clog2(MAXN + 1), EW = $clog2(MAXE + 1);
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [ADDR_W-1:0] desc_addr;
  snap_desc_t desc;
  logic rq_valid, rq_ready, rs_valid, wr_ready;
  logic [ADDR_W-1:0] rq_addr;
  logic [DRAM_W-1:0] rs_data;
  logic coo_we, csc_start, csc_done, csc_busy;
  logic [EW-1:0] coo_waddr;
  coo_edge_t coo_wdata;
  logic raw_we;
  logic [NW-1:0] raw_waddr, raw_raddr;
  logic [31:0] raw_wdata, raw_rdata;
  logic emb_we;
  logic [1:0] emb_tab;
  logic [NW-1:0] emb_waddr;
  logic [F*32-1:0] emb_wdata;
  logic [31:0] rawbuf [MAXN];
  logic [NW-1:0] ptr_addr [1];
  logic [EW-1:0] ptr_data [1];
  logic [EW-1:0] e_addr [1];
  logic [15:0] e_src [1];
  logic [31:0] e_val [1];
  int checks = 0, failures = 0, n_csc_start = 0, n_emb = 0, n_coo = 0, n_raw = 0;
  int cur_n, cur_e;
  logic [31:0] bases [3];
  logic [31:0] rawid [MAXN];

  graph_loader #(.F(F), .MAXN(MAXN), .MAXE(MAXE), .NTAB(3)) dut (.*);
  coo2csc #(.MAXN(MAXN), .MAXE(MAXE), .NRD(1)) u_csc (
    .clk, .rst_n, .coo_we, .coo_waddr, .coo_wdata, .start(csc_start),
    .n_nodes(NW'(desc.n_nodes)), .n_edges(EW'(desc.n_edges)), .busy(csc_busy), .done(csc_done),
    .ptr_addr, .ptr_data, .e_addr, .e_src, .e_val);
  dram_model #(.DEPTH(8192)) u_dram (
    .clk, .rq_valid, .rq_ready, .rq_addr, .rs_valid, .rs_data,
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  always #5 clk = ~clk;
  assign raw_rdata = rawbuf[raw_raddr[5:0]];

  always_ff @(posedge clk) begin
    if (raw_we) rawbuf[raw_waddr[5:0]] <= raw_wdata;
    if (csc_start) n_csc_start++;
    if (coo_we) begin
      n_coo++; checks++;
      if (coo_wdata !== u_dram.mem[2000 + coo_waddr][63:0]) begin failures++; $display("FAIL coo %0d", coo_waddr); end
    end
    if (raw_we) begin
      n_raw++; checks++;
      if (raw_wdata !== rawid[raw_waddr]) begin failures++; $display("FAIL raw %0d", raw_waddr); end
    end
    if (emb_we) begin
      n_emb++; checks++;
      if (emb_wdata !== u_dram.mem[bases[emb_tab] + rawid[emb_waddr]][F*32-1:0]) begin
        failures++; $display("FAIL emb tab %0d node %0d", emb_tab, emb_waddr);
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic snapshot(int n, int e, int slot);
    snap_desc_t d;
    bases = '{32'd4000, 32'd5000, 32'd6000};
    for (int i = 0; i < n; i++) rawid[i] = 32'($urandom_range(0, 900));
    d = '{c_base: bases[2], out_base: bases[1], ne_base: bases[0], renum_base: 32'd3000,
          edge_base: 32'd2000, n_edges: 32'(e), n_nodes: 32'(n)};
    u_dram.mem[100 + slot] = DRAM_W'(d);
    for (int i = 0; i < e; i++)
      u_dram.mem[2000 + i] = DRAM_W'({$urandom, 16'($urandom_range(0, n-1)), 16'($urandom_range(0, n-1))});
    for (int i = 0; i < n; i++) u_dram.mem[3000 + i] = DRAM_W'(rawid[i]);
    for (int t = 0; t < 3; t++)
      for (int r = 0; r < 1000; r++)
        for (int w = 0; w < DRAM_W / 32; w++) u_dram.mem[bases[t] + r][w*32 +: 32] = $urandom;
    n_emb = 0; n_coo = 0; n_raw = 0; n_csc_start = 0;
    @(negedge clk); start = 1; desc_addr = ADDR_W'(100 + slot);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks += 6;
    if (desc !== d) begin failures++; $display("FAIL desc"); end
    if (n_coo != e) begin failures++; $display("FAIL edge count %0d", n_coo); end
    if (n_raw != n) begin failures++; $display("FAIL raw count"); end
    if (n_emb != 3 * n) begin failures++; $display("FAIL emb count %0d", n_emb); end
    if (n_csc_start != 1 || csc_busy) begin failures++; $display("FAIL converter not run/finished"); end
    ptr_addr[0] = NW'(n); #1;
    if (ptr_data[0] !== EW'(e)) begin failures++; $display("FAIL csc size"); end
  endtask

  initial begin
    start = 0; desc_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    snapshot(40, 100, 0);
    snapshot(64, 128, 1);
    snapshot(3, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
