// tb_coo2csc: converts random COO snapshots and checks the CSC result:
// col_ptr equals the prefix sum of in-degrees, and the incoming edges of
// every node appear in COO order with their source and edge data. Both read
// ports are checked. Also checks the conversion time,
// 2*n_nodes + 2*n_edges + 4 cycles from start to done, and a snapshot
// without edges.
module tb_coo2csc;
  import dgnn_pkg::*;
  localparam int MAXN = 32, MAXE = 64, NW = $clog2(MAXN + 1), EW = $clog2(MAXE + 1);
  logic clk = 0, rst_n = 0;
  logic coo_we, start, busy, done;
  logic [EW-1:0] coo_waddr, n_edges;
  coo_edge_t coo_wdata;
  logic [NW-1:0] n_nodes;
  logic [NW-1:0] ptr_addr [2];
  logic [EW-1:0] ptr_data [2];
  logic [EW-1:0] e_addr [2];
  logic [15:0]   e_src [2];
  logic [31:0]   e_val [2];
  coo_edge_t edges [MAXE];
  int checks = 0, failures = 0;

  coo2csc #(.MAXN(MAXN), .MAXE(MAXE), .NRD(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int e);
    int cyc, k, p;
    for (int i = 0; i < e; i++) begin
      edges[i].src = 16'($urandom_range(0, n - 1));
      edges[i].dst = 16'($urandom_range(0, n - 1));
      edges[i].val = $urandom;
      @(negedge clk); coo_we = 1; coo_waddr = EW'(i); coo_wdata = edges[i];
    end
    @(negedge clk); coo_we = 0; start = 1; n_nodes = NW'(n); n_edges = EW'(e);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 2 * n + 2 * e + 4) begin failures++; $display("FAIL cycles %0d want %0d", cyc, 2*n+2*e+4); end
    p = 0;
    for (int v = 0; v <= n; v++) begin
      ptr_addr[v % 2] = NW'(v); #1;
      checks++;
      if (ptr_data[v % 2] !== EW'(p)) begin failures++; $display("FAIL ptr[%0d]=%0d want %0d", v, ptr_data[v%2], p); end
      if (v == n) break;
      k = p;
      for (int i = 0; i < e; i++)
        if (edges[i].dst == 16'(v)) begin
          e_addr[k % 2] = EW'(k); #1;
          checks += 2;
          if (e_src[k % 2] !== edges[i].src) begin failures++; $display("FAIL src slot %0d", k); end
          if (e_val[k % 2] !== edges[i].val) begin failures++; $display("FAIL val slot %0d", k); end
          k++;
        end
      p = k;
    end
  endtask

  initial begin
    coo_we = 0; start = 0; coo_waddr = 0; coo_wdata = '0; n_nodes = 0; n_edges = 0;
    ptr_addr = '{0, 0}; e_addr = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(20, 50);
    run(32, 64);
    run(5, 0);
    run(7, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
