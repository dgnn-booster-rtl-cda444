// dgnn_booster: top level holding both DGNN-Booster dataflows behind one
// DRAM port.
//
// V1 (dgnn_v1) runs weights-evolved DGNNs such as EvolveGCN, overlapping GNN
// and RNN of adjacent time steps; V2 (dgnn_v2) runs stacked and integrated
// DGNNs such as GCRN-M2, overlapping GNN and RNN within a time step. The
// paper builds each as its own FPGA image; here both sit in one top and
// `mode` (sampled with `start`: 0 = V1, 1 = V2) chooses which engine runs
// and owns the DRAM port until its `done` pulse. The host prepares DRAM
// (weights at wparam_base, one snapshot descriptor per time step at
// desc_base + s, edge lists, renumbering tables and embedding tables; see
// dgnn_pkg, dgnn_v1, dgnn_v2) and then pulses start with n_snap > 0.
// DRAM port: reads are requested on rq_* (moves when rq_valid && rq_ready)
// and answered in order on rs_*; writes move on wr_valid && wr_ready. One
// word is DRAM_W bits.
module dgnn_booster
  import dgnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               mode,
  input  logic [15:0]        n_snap,
  input  logic [ADDR_W-1:0]  desc_base,
  input  logic [ADDR_W-1:0]  wparam_base,
  output logic               busy,
  output logic               done,
  output logic               rq_valid,
  input  logic               rq_ready,
  output logic [ADDR_W-1:0]  rq_addr,
  input  logic               rs_valid,
  input  logic [DRAM_W-1:0]  rs_data,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [DRAM_W-1:0]  wr_data
);
  logic sel;                     // engine that owns the DRAM port
  logic v1_busy, v1_done, v2_busy, v2_done;
  logic v1_rq_valid, v2_rq_valid, v1_wr_valid, v2_wr_valid;
  logic [ADDR_W-1:0] v1_rq_addr, v2_rq_addr, v1_wr_addr, v2_wr_addr;
  logic [DRAM_W-1:0] v1_wr_data, v2_wr_data;

  always_ff @(posedge clk) begin
    if (!rst_n) sel <= 1'b0;
    else if (start && !busy) sel <= mode;
  end

  dgnn_v1 u_v1 (
    .clk, .rst_n, .start(start && !busy && !mode), .n_snap, .desc_base, .wparam_base,
    .busy(v1_busy), .done(v1_done),
    .rq_valid(v1_rq_valid), .rq_ready(rq_ready && !sel), .rq_addr(v1_rq_addr),
    .rs_valid(rs_valid && !sel), .rs_data,
    .wr_valid(v1_wr_valid), .wr_ready(wr_ready && !sel), .wr_addr(v1_wr_addr),
    .wr_data(v1_wr_data));

  dgnn_v2 u_v2 (
    .clk, .rst_n, .start(start && !busy && mode), .n_snap, .desc_base, .wparam_base,
    .busy(v2_busy), .done(v2_done),
    .rq_valid(v2_rq_valid), .rq_ready(rq_ready && sel), .rq_addr(v2_rq_addr),
    .rs_valid(rs_valid && sel), .rs_data,
    .wr_valid(v2_wr_valid), .wr_ready(wr_ready && sel), .wr_addr(v2_wr_addr),
    .wr_data(v2_wr_data));

  assign busy     = v1_busy | v2_busy;
  assign done     = v1_done | v2_done;
  assign rq_valid = sel ? v2_rq_valid : v1_rq_valid;
  assign rq_addr  = sel ? v2_rq_addr  : v1_rq_addr;
  assign wr_valid = sel ? v2_wr_valid : v1_wr_valid;
  assign wr_addr  = sel ? v2_wr_addr  : v1_wr_addr;
  assign wr_data  = sel ? v2_wr_data  : v1_wr_data;

  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(v1_busy && v2_busy));
endmodule
