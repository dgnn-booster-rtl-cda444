// gcn_mp: message passing (MP) of the GCN processing element.
//
// For each local node v = 0 .. n_nodes-1 in turn it walks v's incoming edges
// in CSC order and accumulates m_v = sum over edges (u -> v) of e_uv * x_u,
// with F single-precision multiply-adds in parallel, one per feature. e_uv is
// the scalar edge data of the snapshot; GCN normalisation and self loops are
// expected to be folded into it by the host (a self loop is an edge v -> v).
// The aggregated vector leaves on a valid/ready stream tagged with v, so MP
// can feed node transformation directly (V2) or fill a buffer (V1).
// Timing: two cycles to fetch col_ptr[v] and col_ptr[v+1], then one edge per
// cycle (the embedding buffer has one cycle of read latency, so the source
// row read in one cycle is accumulated in the next), one drain cycle, then
// the result is offered until accepted. The paper names message passing and
// places it in the GNN PE; the schedule above is this design's own.
module gcn_mp
  import dgnn_pkg::*;
#(
  parameter int unsigned F    = FEAT,
  parameter int unsigned MAXN = MAX_NODES,
  parameter int unsigned MAXE = MAX_EDGES,
  localparam int unsigned NW  = $clog2(MAXN + 1),
  localparam int unsigned EW  = $clog2(MAXE + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NW-1:0]        n_nodes,
  output logic                 busy,
  output logic                 done,
  // CSC read port (asynchronous)
  output logic [NW-1:0]        ptr_addr,
  input  logic [EW-1:0]        ptr_data,
  output logic [EW-1:0]        e_addr,
  input  logic [15:0]          e_src,
  input  fp32_t                e_val,
  // node embedding buffer read port (one cycle latency)
  output logic                 x_re,
  output logic [NW-1:0]        x_addr,
  input  logic [F-1:0][31:0]   x_data,
  // aggregated node stream
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [NW-1:0]        out_node,
  output logic [F-1:0][31:0]   out_vec
);
  typedef enum logic [2:0] {S_IDLE, S_PTR0, S_PTR1, S_EDGE, S_OUT} state_t;

  state_t              st;
  logic [NW-1:0]       v, nn;
  logic [EW-1:0]       e, e_end;
  logic                p_vld;
  fp32_t               p_val;
  logic [F-1:0][31:0]  acc;

  assign busy      = (st != S_IDLE);
  assign ptr_addr  = (st == S_PTR1) ? v + 1'b1 : v;
  assign e_addr    = e;
  assign x_re      = (st == S_EDGE) && (e < e_end);
  assign x_addr    = e_src[NW-1:0];
  assign out_valid = (st == S_OUT);
  assign out_node  = v;
  assign out_vec   = acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      v     <= '0;
      nn    <= '0;
      e     <= '0;
      e_end <= '0;
      p_vld <= 1'b0;
      p_val <= '0;
      acc   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          nn <= n_nodes;
          v  <= '0;
          st <= (n_nodes == '0) ? S_IDLE : S_PTR0;
          done <= (n_nodes == '0);
        end
        S_PTR0: begin
          e   <= ptr_data;
          acc <= '0;
          st  <= S_PTR1;
        end
        S_PTR1: begin
          e_end <= ptr_data;
          st    <= S_EDGE;
        end
        S_EDGE: begin
          p_vld <= x_re;
          p_val <= e_val;
          if (x_re) e <= e + 1'b1;
          if (p_vld)
            for (int f = 0; f < F; f++) acc[f] <= fp_mac(p_val, x_data[f], acc[f]);
          if (!x_re && !p_vld) st <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (v == nn - 1'b1) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end else begin
            v  <= v + 1'b1;
            st <= S_PTR0;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
