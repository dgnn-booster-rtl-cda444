// act_unit: single-precision activation unit for the GNN and RNN PEs.
//
// op selects the function: 0 = ReLU (GCN node transformation), 1 = sigmoid
// and 2 = tanh (RNN gates), 3 = identity. Sigmoid is the piecewise-linear
// PLAN approximation with power-of-two slopes and tanh(x) = 2*sigmoid(2x)-1;
// these approximations are this design's choice, the paper does not say how
// its activations are computed. Purely combinational.
module act_unit
  import dgnn_pkg::*;
(
  input  logic [1:0] op,
  input  fp32_t      x,
  output fp32_t      y
);
  always_comb begin
    unique case (op)
      2'd0:    y = fp_relu(x);
      2'd1:    y = fp_sigmoid(x);
      2'd2:    y = fp_tanh(x);
      default: y = x;
    endcase
  end
endmodule
