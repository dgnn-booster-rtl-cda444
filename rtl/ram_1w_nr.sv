// ram_1w_nr: one write port, NRD read ports.
//
// REG_RD = 1 gives registered reads (data one cycle after the address), the
// behaviour of the FPGA's block RAM, which holds node embeddings. REG_RD = 0
// gives asynchronous reads, the behaviour of distributed LUT RAM, which holds
// the weights (the paper places weights in LUTRAM and embeddings in BRAM).
// Contents are not reset.
module ram_1w_nr #(
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned NRD    = 1,
  parameter bit          REG_RD = 1'b1,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr [NRD],
  output logic [WIDTH-1:0] rdata [NRD]
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  for (genvar r = 0; r < NRD; r++) begin : g_rd
    if (REG_RD) begin : g_sync
      always_ff @(posedge clk) rdata[r] <= mem[raddr[r]];
    end else begin : g_async
      assign rdata[r] = mem[raddr[r]];
    end
  end
endmodule
