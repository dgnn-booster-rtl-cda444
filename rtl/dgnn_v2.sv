// dgnn_v2: DGNN-Booster V2, the integrated (GCRN-M2) accelerator.
//
// GCRN-M2 replaces the matrix products of an LSTM by graph convolutions: per
// snapshot, GNN1 convolves the node inputs X (F features) and GNN2 the
// previous hidden states H (H = F features), each producing the 4*H gate
// pre-activations of every node, and an LSTM cell per node turns them, with
// the previous cell state C, into the new H and C. Here GNN1 and GNN2 run side
// by side, each with message passing streaming straight into node
// transformation; every finished node goes into a node queue (one FIFO per
// GNN), and the temporal-processing PE pops the two queues in the same node
// order and writes the node's new H and C back to DRAM. GNN and RNN therefore
// work on different nodes at the same time (node-level pipelining), which is
// the paper's V2 dataflow; a full queue stalls the GNNs.
//
// Graph loading is not overlapped here: for each snapshot the loader brings
// X, H and C of the snapshot's nodes (gathered through the renumbering table
// from the ne_base, out_base and c_base tables) and the edges, then the GNNs
// start. New H and C are written back in place to out_base + raw id and
// c_base + raw id (the GNNs read the on-chip copy, so this is safe).
// The weights are loaded once from wparam_base, four DRAM words of H values
// per matrix row (one per gate): W_x rows 0..F-1, W_h rows 0..F-1, then the
// bias row and the peephole row. Snapshot s is described at desc_base + s.
// The paper draws one NE PE and one TP PE per node; this version has one of
// each per GNN, parallel over features instead of nodes.
module dgnn_v2
  import dgnn_pkg::*;
#(
  parameter int unsigned F      = FEAT,
  parameter int unsigned MAXN   = MAX_NODES,
  parameter int unsigned MAXE   = MAX_EDGES,
  parameter int unsigned QDEPTH = 4,
  localparam int unsigned H     = F,
  localparam int unsigned NW    = $clog2(MAXN + 1),
  localparam int unsigned EW    = $clog2(MAXE + 1),
  localparam int unsigned FW    = (F > 1) ? $clog2(F) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
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
  typedef enum logic [2:0] {C_IDLE, C_WL, C_GL, C_RUN} ctl_t;
  typedef logic [4*H-1:0][31:0] gvec_t;

  ctl_t        ctl;
  logic [15:0] s, nsnap;
  logic [NW-1:0] cur_n, wb_cnt;
  logic [31:0]   cur_h, cur_c;

  assign busy = (ctl != C_IDLE);

  // ------------------------------------------------------------ weights (LUTRAM)
  gvec_t wx [F];
  gvec_t wh [F];
  gvec_t bias, peep;

  logic [ADDR_W-1:0] wl_iss, wl_rsp;
  logic [1:0]        wl_blk, wl_chk;
  logic [FW-1:0]     wl_row;
  localparam int unsigned WL_WORDS = 8 * F + 8;
  logic              wl_rq;
  assign wl_rq = (ctl == C_WL) && (wl_iss < ADDR_W'(WL_WORDS));

  always_ff @(posedge clk)
    if (ctl == C_WL && rs_valid) begin
      unique case (wl_blk)
        2'd0: wx[wl_row][wl_chk*H +: H] <= rs_data[H*32-1:0];
        2'd1: wh[wl_row][wl_chk*H +: H] <= rs_data[H*32-1:0];
        2'd2: bias[wl_chk*H +: H]       <= rs_data[H*32-1:0];
        default: peep[wl_chk*H +: H]    <= rs_data[H*32-1:0];
      endcase
    end

  // ------------------------------------------------------------ graph loading
  logic              gl_start, gl_busy, gl_done;
  snap_desc_t        gl_desc;
  logic              gl_rq_valid;
  logic [ADDR_W-1:0] gl_rq_addr;
  logic              coo_we, csc_start, csc_busy, csc_done;
  logic [EW-1:0]     coo_waddr;
  coo_edge_t         coo_wdata;
  logic              raw_we;
  logic [NW-1:0]     raw_waddr, gl_raw_raddr, wb_raw_addr;
  logic [31:0]       raw_wdata;
  logic [31:0]       raw_rd [2];
  logic              emb_we;
  logic [1:0]        emb_tab;
  logic [NW-1:0]     emb_waddr;
  logic [F*32-1:0]   emb_wdata;

  graph_loader #(.F(F), .MAXN(MAXN), .MAXE(MAXE), .NTAB(3)) u_gl (
    .clk, .rst_n, .start(gl_start), .desc_addr(desc_base + ADDR_W'(s)),
    .busy(gl_busy), .done(gl_done), .desc(gl_desc),
    .rq_valid(gl_rq_valid), .rq_ready(rq_ready && ctl == C_GL), .rq_addr(gl_rq_addr),
    .rs_valid(rs_valid && ctl == C_GL), .rs_data,
    .coo_we, .coo_waddr, .coo_wdata, .csc_start, .csc_done,
    .raw_we, .raw_waddr, .raw_wdata, .raw_raddr(gl_raw_raddr), .raw_rdata(raw_rd[0]),
    .emb_we, .emb_tab, .emb_waddr, .emb_wdata);

  ram_1w_nr #(.WIDTH(32), .DEPTH(MAXN), .NRD(2), .REG_RD(1'b0)) u_raw (
    .clk, .we(raw_we), .waddr(raw_waddr), .wdata(raw_wdata),
    .raddr('{gl_raw_raddr, wb_raw_addr}), .rdata(raw_rd));

  // X, H, C buffers (BRAM)
  logic [NW-1:0]   x_addr, h_addr, c_addr;
  logic [F*32-1:0] x_rd [1];
  logic [F*32-1:0] h_rd [1];
  logic [F*32-1:0] c_rd [1];
  ram_1w_nr #(.WIDTH(F*32), .DEPTH(MAXN), .NRD(1), .REG_RD(1'b1)) u_xbuf (
    .clk, .we(emb_we && emb_tab == 2'd0), .waddr(emb_waddr), .wdata(emb_wdata),
    .raddr('{x_addr}), .rdata(x_rd));
  ram_1w_nr #(.WIDTH(F*32), .DEPTH(MAXN), .NRD(1), .REG_RD(1'b1)) u_hbuf (
    .clk, .we(emb_we && emb_tab == 2'd1), .waddr(emb_waddr), .wdata(emb_wdata),
    .raddr('{h_addr}), .rdata(h_rd));
  ram_1w_nr #(.WIDTH(F*32), .DEPTH(MAXN), .NRD(1), .REG_RD(1'b1)) u_cbuf (
    .clk, .we(emb_we && emb_tab == 2'd2), .waddr(emb_waddr), .wdata(emb_wdata),
    .raddr('{c_addr}), .rdata(c_rd));

  // ------------------------------------------------------------ CSC, two ports
  logic [NW-1:0] ptr_addr [2];
  logic [EW-1:0] ptr_data [2];
  logic [EW-1:0] e_addr   [2];
  logic [15:0]   e_src    [2];
  fp32_t         e_val    [2];

  coo2csc #(.MAXN(MAXN), .MAXE(MAXE), .NRD(2)) u_csc (
    .clk, .rst_n, .coo_we, .coo_waddr, .coo_wdata,
    .start(csc_start), .n_nodes(NW'(gl_desc.n_nodes)), .n_edges(EW'(gl_desc.n_edges)),
    .busy(csc_busy), .done(csc_done),
    .ptr_addr, .ptr_data, .e_addr, .e_src, .e_val);

  // ------------------------------------------------------------ GNN1 and GNN2
  logic                mp_start;
  logic                mp_busy [2];
  logic                mp_done [2];
  logic                mp_x_re [2];
  logic [NW-1:0]       mp_x_addr [2];
  logic [F-1:0][31:0]  mp_x_data [2];
  logic                mp_ov [2];
  logic                mp_or [2];
  logic [NW-1:0]       mp_on [2];
  logic [F-1:0][31:0]  mp_vec [2];
  logic                nt_busy [2];
  logic [FW-1:0]       nt_w_addr [2];
  gvec_t               nt_w_row [2];
  logic                nt_ov [2];
  logic                nt_or [2];
  logic [NW-1:0]       nt_on [2];
  gvec_t               nt_vec [2];
  logic                q_v [2];
  logic                q_r [2];
  logic [NW-1:0]       q_node [2];
  gvec_t               q_vec [2];
  logic [1:0]          q_stall;

  assign x_addr       = mp_x_addr[0];
  assign h_addr       = mp_x_addr[1];
  assign mp_x_data[0] = x_rd[0];
  assign mp_x_data[1] = h_rd[0];
  assign nt_w_row[0]  = wx[nt_w_addr[0]];
  assign nt_w_row[1]  = wh[nt_w_addr[1]];

  for (genvar g = 0; g < 2; g++) begin : g_gnn
    gcn_mp #(.F(F), .MAXN(MAXN), .MAXE(MAXE)) u_mp (
      .clk, .rst_n, .start(mp_start), .n_nodes(cur_n), .busy(mp_busy[g]), .done(mp_done[g]),
      .ptr_addr(ptr_addr[g]), .ptr_data(ptr_data[g]), .e_addr(e_addr[g]),
      .e_src(e_src[g]), .e_val(e_val[g]),
      .x_re(mp_x_re[g]), .x_addr(mp_x_addr[g]), .x_data(mp_x_data[g]),
      .out_valid(mp_ov[g]), .out_ready(mp_or[g]), .out_node(mp_on[g]), .out_vec(mp_vec[g]));

    gcn_nt #(.F(F), .FO(4*H), .MAXN(MAXN)) u_nt (
      .clk, .rst_n, .relu_en(1'b0), .busy(nt_busy[g]),
      .in_valid(mp_ov[g]), .in_ready(mp_or[g]), .in_node(mp_on[g]), .in_vec(mp_vec[g]),
      .w_addr(nt_w_addr[g]), .w_row(nt_w_row[g]),
      .out_valid(nt_ov[g]), .out_ready(nt_or[g]), .out_node(nt_on[g]), .out_vec(nt_vec[g]));

    // node queue between this GNN and the temporal PE
    logic [NW+4*H*32-1:0] q_dout;
    sync_fifo #(.WIDTH(NW + 4*H*32), .DEPTH(QDEPTH)) u_queue (
      .clk, .rst_n,
      .in_valid(nt_ov[g]), .in_ready(nt_or[g]), .din({nt_on[g], nt_vec[g]}),
      .out_valid(q_v[g]), .out_ready(q_r[g]), .dout(q_dout),
      .full_stall(q_stall[g]));
    assign q_node[g] = q_dout[NW+4*H*32-1 -: NW];
    assign q_vec[g]  = q_dout[4*H*32-1:0];
  end

  // ------------------------------------------------------------ temporal PE
  logic               tp_busy, tp_c_re, o_valid, o_ready;
  logic [NW-1:0]      o_node;
  logic [H-1:0][31:0] o_h, o_c;

  tp_pe #(.H(H), .MAXN(MAXN)) u_tp (
    .clk, .rst_n, .busy(tp_busy),
    .q1_valid(q_v[0]), .q1_ready(q_r[0]), .q1_node(q_node[0]), .q1_vec(q_vec[0]),
    .q2_valid(q_v[1]), .q2_ready(q_r[1]), .q2_node(q_node[1]), .q2_vec(q_vec[1]),
    .bias, .peep,
    .c_re(tp_c_re), .c_addr, .c_data(c_rd[0]),
    .o_valid, .o_ready, .o_node, .o_h, .o_c);

  // write-back: new H, then new C, of each node
  logic wb_c;
  assign wb_raw_addr = o_node;
  assign wr_valid    = o_valid;
  assign wr_addr     = (wb_c ? cur_c : cur_h) + raw_rd[1];
  assign wr_data     = DRAM_W'(wb_c ? o_c : o_h);
  assign o_ready     = wb_c && wr_ready;

  // DRAM read mux
  assign rq_valid = (ctl == C_WL) ? wl_rq : (ctl == C_GL && gl_rq_valid);
  assign rq_addr  = (ctl == C_WL) ? wparam_base + wl_iss : gl_rq_addr;

  // ------------------------------------------------------------ control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctl      <= C_IDLE;
      s        <= '0;
      nsnap    <= '0;
      cur_n    <= '0;
      cur_h    <= '0;
      cur_c    <= '0;
      wb_cnt   <= '0;
      wb_c     <= 1'b0;
      wl_iss   <= '0;
      wl_rsp   <= '0;
      wl_blk   <= '0;
      wl_chk   <= '0;
      wl_row   <= '0;
      gl_start <= 1'b0;
      mp_start <= 1'b0;
      done     <= 1'b0;
    end else begin
      gl_start <= 1'b0;
      mp_start <= 1'b0;
      done     <= 1'b0;
      if (wr_valid && wr_ready) wb_c <= ~wb_c;
      if (o_valid && o_ready) wb_cnt <= wb_cnt + 1'b1;
      unique case (ctl)
        C_IDLE: if (start && n_snap != '0) begin
          nsnap  <= n_snap;
          s      <= '0;
          wl_iss <= '0;
          wl_rsp <= '0;
          wl_blk <= '0;
          wl_chk <= '0;
          wl_row <= '0;
          ctl    <= C_WL;
        end
        C_WL: begin
          if (wl_rq && rq_ready) wl_iss <= wl_iss + 1'b1;
          if (rs_valid) begin
            wl_rsp <= wl_rsp + 1'b1;
            wl_chk <= wl_chk + 1'b1;
            if (wl_chk == 2'd3 && (wl_blk >= 2'd2 || wl_row == FW'(F - 1))) begin
              wl_row <= '0;
              wl_blk <= wl_blk + 1'b1;
            end else if (wl_chk == 2'd3) wl_row <= wl_row + 1'b1;
            if (wl_rsp == ADDR_W'(WL_WORDS - 1)) begin
              ctl      <= C_GL;
              gl_start <= 1'b1;
            end
          end
        end
        C_GL: if (gl_done) begin
          cur_n    <= NW'(gl_desc.n_nodes);
          cur_h    <= gl_desc.out_base;
          cur_c    <= gl_desc.c_base;
          wb_cnt   <= '0;
          mp_start <= 1'b1;
          ctl      <= C_RUN;
        end
        C_RUN: if (!mp_start && wb_cnt == cur_n && !mp_busy[0] && !mp_busy[1]) begin
          if (s == nsnap - 1'b1) begin
            ctl  <= C_IDLE;
            done <= 1'b1;
          end else begin
            s        <= s + 1'b1;
            ctl      <= C_GL;
            gl_start <= 1'b1;
          end
        end
        default: ctl <= C_IDLE;
      endcase
    end
  end

  // GNN1 and GNN2 visit nodes in the same order, so the queue heads pair up
  a_queues_in_order: assert property (@(posedge clk) disable iff (!rst_n)
                                      (q_v[0] && q_v[1]) |-> q_node[0] == q_node[1]);
endmodule
