// sync_fifo: synchronous first-word-fall-through FIFO with valid/ready ports.
//
// Used for the streaming links between the gate stages of the RNN PE and as
// the node queues that carry node embeddings from the GNN PEs to the
// temporal-processing PE. A word moves on a port when valid and ready are
// both high in a clock cycle; dout is valid in the same cycle as out_valid.
// Depth and width are parameters (the paper gives neither). Active-low
// synchronous reset empties the FIFO. full_stall pulses when a producer
// offers a word that the FIFO cannot accept (back-pressure).
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] din,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] dout,
  output logic             full_stall
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;
  logic             push, pop;

  assign in_ready   = (cnt < (AW+1)'(DEPTH));
  assign out_valid  = (cnt != '0);
  assign dout       = mem[rp];
  assign push       = in_valid & in_ready;
  assign pop        = out_valid & out_ready;
  assign full_stall = in_valid & ~in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) begin
        mem[wp] <= din;
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // a word must never be written while the FIFO is full
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   push |-> cnt < (AW+1)'(DEPTH));
endmodule
