// gcn_nt: node transformation (NT) of the GCN processing element.
//
// Takes one aggregated node vector m (F features) from a valid/ready stream
// and computes y = act(m * W), W being an F x FO weight matrix read one row
// per cycle from a LUT-RAM weight buffer (asynchronous read, w_addr -> w_row).
// FO multiply-adds work in parallel; the F rows take F cycles. act is ReLU
// when relu_en is set (the EvolveGCN layer of V1) and identity otherwise (the
// gate pre-activations of V2). The GCN layer has no bias, as in EvolveGCN;
// the LSTM biases of V2 are added in the temporal PE.
// Timing: accepts a node when idle, F cycles of accumulation, then offers the
// result until accepted: F+2 cycles per node without back-pressure. The
// paper names the NT stage; its internal schedule is this design's own.
module gcn_nt
  import dgnn_pkg::*;
#(
  parameter int unsigned F    = FEAT,
  parameter int unsigned FO   = FEAT,
  parameter int unsigned MAXN = MAX_NODES,
  localparam int unsigned NW  = $clog2(MAXN + 1),
  localparam int unsigned FW  = (F > 1) ? $clog2(F) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 relu_en,
  output logic                 busy,
  // aggregated node stream in
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [NW-1:0]        in_node,
  input  logic [F-1:0][31:0]   in_vec,
  // weight row read (asynchronous)
  output logic [FW-1:0]        w_addr,
  input  logic [FO-1:0][31:0]  w_row,
  // transformed node stream out
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [NW-1:0]        out_node,
  output logic [FO-1:0][31:0]  out_vec
);
  typedef enum logic [1:0] {S_IDLE, S_MAC, S_OUT} state_t;

  state_t              st;
  logic [FW-1:0]       k;
  logic [F-1:0][31:0]  m;
  logic [FO-1:0][31:0] acc;
  logic [NW-1:0]       node;

  assign busy      = (st != S_IDLE);
  assign in_ready  = (st == S_IDLE);
  assign w_addr    = k;
  assign out_valid = (st == S_OUT);
  assign out_node  = node;
  always_comb
    for (int o = 0; o < FO; o++) out_vec[o] = relu_en ? fp_relu(acc[o]) : acc[o];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      k    <= '0;
      m    <= '0;
      acc  <= '0;
      node <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (in_valid) begin
          m    <= in_vec;
          node <= in_node;
          acc  <= '0;
          k    <= '0;
          st   <= S_MAC;
        end
        S_MAC: begin
          for (int o = 0; o < FO; o++) acc[o] <= fp_mac(m[k], w_row[o], acc[o]);
          if (k == FW'(F - 1)) st <= S_OUT;
          else k <= k + 1'b1;
        end
        S_OUT: if (out_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
