// coo2csc: on-chip converter from the COO edge list of one snapshot to CSC.
//
// The host delivers each snapshot as an unordered COO list (source,
// destination, edge data). Message passing needs, for every destination node,
// the contiguous list of its incoming edges, so the list is re-sorted by
// destination on the FPGA, as the paper proposes. The sort is a counting sort
// in four passes over LUT-RAM arrays with asynchronous reads:
//   CLEAR   pos[v] = 0                       for v in 0..n_nodes
//   COUNT   pos[dst]++                       for every edge
//   SCAN    col_ptr[v] = pos[v] = prefix sum of the in-degrees
//   SCATTER slot = pos[dst]++ ; csc_src/csc_val[slot] = edge
// CLEAR and SCAN take n_nodes+1 cycles each, COUNT and SCATTER n_edges
// each; done is high in the cycle 2*n_nodes + 2*n_edges + 4 cycles after the
// one in which start is high. Incoming edges of node v are csc entries
// col_ptr[v] .. col_ptr[v+1]-1, in COO order. NRD read ports serve the GNN
// PEs (two in the V2 design). The pass structure is this design's own; the
// paper gives only the converter's function. The COO list is written through
// coo_we while the converter is idle.
module coo2csc
  import dgnn_pkg::*;
#(
  parameter int unsigned MAXN = MAX_NODES,
  parameter int unsigned MAXE = MAX_EDGES,
  parameter int unsigned NRD  = 1,
  localparam int unsigned NW  = $clog2(MAXN + 1),
  localparam int unsigned EW  = $clog2(MAXE + 1),
  localparam int unsigned EA  = $clog2(MAXE)
) (
  input  logic          clk,
  input  logic          rst_n,
  // COO list fill port
  input  logic          coo_we,
  input  logic [EW-1:0] coo_waddr,
  input  coo_edge_t     coo_wdata,
  // conversion control
  input  logic          start,
  input  logic [NW-1:0] n_nodes,
  input  logic [EW-1:0] n_edges,
  output logic          busy,
  output logic          done,
  // CSC read ports (asynchronous)
  input  logic [NW-1:0] ptr_addr [NRD],
  output logic [EW-1:0] ptr_data [NRD],
  input  logic [EW-1:0] e_addr   [NRD],
  output logic [15:0]   e_src    [NRD],
  output fp32_t         e_val    [NRD]
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_COUNT, S_SCAN, S_SCATTER, S_DONE} state_t;

  coo_edge_t     coo     [MAXE];
  logic [EW-1:0] pos     [MAXN+1];
  logic [EW-1:0] col_ptr [MAXN+1];
  logic [15:0]   csc_src [MAXE];
  fp32_t         csc_val [MAXE];

  state_t        st;
  logic [EW-1:0] i;       // node or edge index of the current pass
  logic [EW-1:0] run;     // running prefix sum
  logic [NW-1:0] nn;
  logic [EW-1:0] ne;
  coo_edge_t     ed;

  assign ed   = coo[i[EA-1:0]];
  assign busy = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (coo_we && st == S_IDLE) coo[coo_waddr[EA-1:0]] <= coo_wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      i    <= '0;
      run  <= '0;
      nn   <= '0;
      ne   <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          nn <= n_nodes;
          ne <= n_edges;
          i  <= '0;
          st <= S_CLEAR;
        end
        S_CLEAR: begin
          pos[i[NW-1:0]] <= '0;
          if (i == EW'(nn)) begin
            i   <= '0;
            run <= '0;
            st  <= (ne == '0) ? S_SCAN : S_COUNT;
          end else i <= i + 1'b1;
        end
        S_COUNT: begin
          pos[ed.dst[NW-1:0]] <= pos[ed.dst[NW-1:0]] + 1'b1;
          if (i == ne - 1'b1) begin
            i   <= '0;
            run <= '0;
            st  <= S_SCAN;
          end else i <= i + 1'b1;
        end
        S_SCAN: begin
          col_ptr[i[NW-1:0]] <= run;
          if (i == EW'(nn)) begin
            i  <= '0;
            st <= (ne == '0) ? S_DONE : S_SCATTER;
          end else begin
            pos[i[NW-1:0]] <= run;
            run <= run + pos[i[NW-1:0]];
            i   <= i + 1'b1;
          end
        end
        S_SCATTER: begin
          csc_src[pos[ed.dst[NW-1:0]][EA-1:0]] <= ed.src;
          csc_val[pos[ed.dst[NW-1:0]][EA-1:0]] <= ed.val;
          pos[ed.dst[NW-1:0]] <= pos[ed.dst[NW-1:0]] + 1'b1;
          if (i == ne - 1'b1) st <= S_DONE;
          else i <= i + 1'b1;
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  for (genvar r = 0; r < NRD; r++) begin : g_rd
    assign ptr_data[r] = col_ptr[ptr_addr[r]];
    assign e_src[r]    = csc_src[e_addr[r][EA-1:0]];
    assign e_val[r]    = csc_val[e_addr[r][EA-1:0]];
  end

  a_dst_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   st == S_COUNT |-> ed.dst < 16'(nn));
endmodule
