// dram_model: behavioural off-chip memory for the testbenches.
//
// A word-addressed array of DRAM_W-bit words. Read requests are accepted when
// rq_valid is high and the model's ready is high (ready is randomly withheld
// about one cycle in STALL_PCT percent, WR_STALL_PCT for writes) and answered in order LAT cycles later
// on rs_valid/rs_data. Writes are accepted on wr_valid && wr_ready, wr_ready
// being randomly withheld the same way. Testbenches load and inspect `mem`
// hierarchically. Addresses wrap at DEPTH.
module dram_model
  import dgnn_pkg::*;
#(
  parameter int unsigned DEPTH     = 4096,
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 20,
  parameter int unsigned WR_STALL_PCT = STALL_PCT
) (
  input  logic               clk,
  input  logic               rq_valid,
  output logic               rq_ready,
  input  logic [ADDR_W-1:0]  rq_addr,
  output logic               rs_valid,
  output logic [DRAM_W-1:0]  rs_data,
  input  logic               wr_valid,
  output logic               wr_ready,
  input  logic [ADDR_W-1:0]  wr_addr,
  input  logic [DRAM_W-1:0]  wr_data
);
  logic [DRAM_W-1:0] mem [DEPTH];
  logic              pv [LAT];
  logic [DRAM_W-1:0] pd [LAT];
  int unsigned       n_rd_stall, n_wr_stall;

  initial begin
    for (int i = 0; i < LAT; i++) pv[i] = 1'b0;
    rq_ready = 1'b1;
    wr_ready = 1'b1;
    n_rd_stall = 0;
    n_wr_stall = 0;
  end

  assign rs_valid = pv[LAT-1];
  assign rs_data  = pd[LAT-1];

  always_ff @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= rq_valid && rq_ready;
    pd[0] <= mem[rq_addr % DEPTH];
    if (wr_valid && wr_ready) mem[wr_addr % DEPTH] <= wr_data;
    if (rq_valid && !rq_ready) n_rd_stall <= n_rd_stall + 1;
    if (wr_valid && !wr_ready) n_wr_stall <= n_wr_stall + 1;
    rq_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    wr_ready <= ($urandom_range(0, 99) >= WR_STALL_PCT);
  end
endmodule
