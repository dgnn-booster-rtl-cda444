// tp_pe: temporal-processing PE of DGNN-Booster V2 (GCRN-M2 LSTM cell).
//
// It pops one node at a time from the two node queues: q1 carries the four
// gate pre-activations that GNN1 computed from the node's input embedding,
// q2 those that GNN2 computed from the previous hidden states (4*H lanes,
// ordered input, forget, cell, output gate). With the node's previous cell
// state c it computes the peephole LSTM of GCRN model 2:
//   i  = sig(x_i + h_i + wc_i*c + b_i)     f = sig(x_f + h_f + wc_f*c + b_f)
//   c' = f*c + i*tanh(x_c + h_c + b_c)
//   o  = sig(x_o + h_o + wc_o*c' + b_o)    h' = o*tanh(c')
// bias and peep are the rows b and wc (the cell slot of peep is unused).
// Timing: cycle 1 adds the queue entries and bias and reads c from the
// cell-state buffer (one cycle read latency); cycle 2 evaluates the cell;
// from cycle 3 the result is offered on the output stream until accepted:
// three cycles per node without back-pressure. The two queue heads must
// belong to the same node (asserted). The equations are GCRN-M2's; the
// two-stage schedule is this design's own.
module tp_pe
  import dgnn_pkg::*;
#(
  parameter int unsigned H    = FEAT,
  parameter int unsigned MAXN = MAX_NODES,
  localparam int unsigned NW  = $clog2(MAXN + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  busy,
  input  logic                  q1_valid,
  output logic                  q1_ready,
  input  logic [NW-1:0]         q1_node,
  input  logic [4*H-1:0][31:0]  q1_vec,
  input  logic                  q2_valid,
  output logic                  q2_ready,
  input  logic [NW-1:0]         q2_node,
  input  logic [4*H-1:0][31:0]  q2_vec,
  input  logic [4*H-1:0][31:0]  bias,
  input  logic [4*H-1:0][31:0]  peep,
  // cell-state buffer read (one cycle latency)
  output logic                  c_re,
  output logic [NW-1:0]         c_addr,
  input  logic [H-1:0][31:0]    c_data,
  // result stream
  output logic                  o_valid,
  input  logic                  o_ready,
  output logic [NW-1:0]         o_node,
  output logic [H-1:0][31:0]    o_h,
  output logic [H-1:0][31:0]    o_c
);
  typedef enum logic [1:0] {S_IDLE, S_CELL, S_OUT} state_t;

  state_t                 st;
  logic [4*H-1:0][31:0]   pre;
  logic [NW-1:0]          node;
  logic                   take;

  assign busy     = (st != S_IDLE);
  assign take     = (st == S_IDLE) && q1_valid && q2_valid;
  assign q1_ready = take;
  assign q2_ready = take;
  assign c_re     = take;
  assign c_addr   = q1_node;
  assign o_valid  = (st == S_OUT);
  assign o_node   = node;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      pre  <= '0;
      node <= '0;
      o_h  <= '0;
      o_c  <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (take) begin
          for (int l = 0; l < 4*H; l++) pre[l] <= fp_add(fp_add(q1_vec[l], q2_vec[l]), bias[l]);
          node <= q1_node;
          st   <= S_CELL;
        end
        S_CELL: begin
          for (int j = 0; j < H; j++) begin
            fp32_t ig, fg, gg, og, cn;
            ig = fp_sigmoid(fp_add(pre[j],       fp_mul(peep[j],     c_data[j])));
            fg = fp_sigmoid(fp_add(pre[H+j],     fp_mul(peep[H+j],   c_data[j])));
            gg = fp_tanh(pre[2*H+j]);
            cn = fp_add(fp_mul(fg, c_data[j]), fp_mul(ig, gg));
            og = fp_sigmoid(fp_add(pre[3*H+j],   fp_mul(peep[3*H+j], cn)));
            o_c[j] <= cn;
            o_h[j] <= fp_mul(og, fp_tanh(cn));
          end
          st <= S_OUT;
        end
        S_OUT: if (o_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  a_same_node: assert property (@(posedge clk) disable iff (!rst_n)
                                take |-> q1_node == q2_node);
endmodule
