// pingpong_buffer: two-bank buffer that lets a producer fill one bank while a
// consumer reads the other, the banks trading places every time step.
//
// The accelerator uses one for the GCN weights (the RNN PE writes the weights
// of step t+1 into one bank while the GNN reads those of step t from the
// other) and one for node embeddings (graph loading of step t+1 overlaps GNN
// inference of step t), as in the paper. wr_bank and rd_bank[r] choose the
// bank of each access; the owner of the buffer flips them every time step.
// Reads are registered (BRAM, REG_RD=1) or asynchronous (LUTRAM, REG_RD=0).
// An assertion flags a write to the bank a reader is using in the same cycle.
module pingpong_buffer #(
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned NRD    = 1,
  parameter bit          REG_RD = 1'b1,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic             wr_bank,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re     [NRD],
  input  logic             rd_bank[NRD],
  input  logic [AW-1:0]    raddr  [NRD],
  output logic [WIDTH-1:0] rdata  [NRD]
);
  logic [WIDTH-1:0] rd0 [NRD];
  logic [WIDTH-1:0] rd1 [NRD];
  logic             sel [NRD];

  ram_1w_nr #(.WIDTH(WIDTH), .DEPTH(DEPTH), .NRD(NRD), .REG_RD(REG_RD)) u_bank0 (
    .clk, .we(we && !wr_bank), .waddr, .wdata, .raddr, .rdata(rd0));
  ram_1w_nr #(.WIDTH(WIDTH), .DEPTH(DEPTH), .NRD(NRD), .REG_RD(REG_RD)) u_bank1 (
    .clk, .we(we && wr_bank), .waddr, .wdata, .raddr, .rdata(rd1));

  for (genvar r = 0; r < NRD; r++) begin : g_rd
    if (REG_RD) begin : g_sync
      always_ff @(posedge clk) sel[r] <= rd_bank[r];
    end else begin : g_async
      assign sel[r] = rd_bank[r];
    end
    assign rdata[r] = sel[r] ? rd1[r] : rd0[r];

    a_no_conflict: assert property (@(posedge clk) !(we && re[r] && wr_bank == rd_bank[r]));
  end
endmodule
