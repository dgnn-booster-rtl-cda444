// dgnn_v1: DGNN-Booster V1, the weights-evolved (EvolveGCN) accelerator.
//
// Per snapshot s the GCN computes O_s = ReLU(A_s X_s W_{s+1}) while an LSTM
// evolves the GCN weights, W_{s+1} = LSTM(W_s). The four tasks of one time
// step - graph loading (GL), message passing (MP), node transformation (NT)
// and the RNN - are overlapped across adjacent time steps:
//   prologue  GL(0)  || RNN(0)
//   phase A   MP(s)  || RNN(s+1)      (the two heavier tasks together)
//   phase B   NT(s)  || GL(s+1)
// Two pairs of ping-pong buffers remove the conflicts: W_k lives in weight
// bank k%2, so RNN(s+1) writes bank s%2 while NT(s) later reads bank
// (s+1)%2; snapshot s lives in node-embedding (and raw-id) bank s%2, so
// GL(s+1) fills the other bank while NT(s) still uses the raw ids of s.
// MP writes its aggregates to a buffer that NT reads in phase B. The schedule
// and buffer pairing follow the paper; the phase barrier (both tasks of a
// phase finish before the next phase starts) is this design's choice.
//
// Before the first snapshot the weights are loaded once from DRAM,
// wparam_base + row, F words per matrix: W_0, then the four LSTM gate
// matrices A_I, A_F, A_C, A_O, then their four bias matrices. Snapshot s is
// described by the descriptor at desc_base + s (see dgnn_pkg). Row i of O_s
// is written to out_base + raw_id(i), its F values in the low F*32 bits.
// DRAM ports: reads as in graph_loader (in-order responses), writes move on
// wr_valid && wr_ready. start begins n_snap time steps; done pulses at the
// end. Feature width F is the same for input, hidden and output.
module dgnn_v1
  import dgnn_pkg::*;
#(
  parameter int unsigned F    = FEAT,
  parameter int unsigned MAXN = MAX_NODES,
  parameter int unsigned MAXE = MAX_EDGES,
  localparam int unsigned NW  = $clog2(MAXN + 1),
  localparam int unsigned EW  = $clog2(MAXE + 1),
  localparam int unsigned FW  = (F > 1) ? $clog2(F) : 1
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
  typedef enum logic [2:0] {C_IDLE, C_WL, C_PRO, C_A, C_B, C_DONE} ctl_t;

  ctl_t        ctl;
  logic [15:0] s, nsnap;
  logic        last_s;           // s is the last snapshot
  logic        gl_ok, rnn_ok, mp_ok, nt_ok;
  logic [NW-1:0]     cur_n;
  logic [31:0]       cur_out;
  logic        wbank_rd;         // weight bank the RNN reads
  logic        gl_bank;          // node bank the loader fills

  assign busy   = (ctl != C_IDLE);
  assign last_s = (s == nsnap - 1'b1);

  // ------------------------------------------------------------ weight load
  logic [ADDR_W-1:0] wl_iss, wl_rsp;
  logic [3:0]        wl_blk;     // 0: W_0, 1..4: gate matrices, 5..8: biases
  logic [FW-1:0]     wl_row;
  logic              wl_rq;
  localparam int unsigned WL_WORDS = 9 * F;
  assign wl_rq = (ctl == C_WL) && (wl_iss < ADDR_W'(WL_WORDS));

  // ------------------------------------------------------------ blocks
  logic              gl_start, gl_busy, gl_done;
  snap_desc_t        gl_desc;
  logic              gl_rq_valid;
  logic [ADDR_W-1:0] gl_rq_addr;
  logic              coo_we, csc_start, csc_busy, csc_done;
  logic [EW-1:0]     coo_waddr;
  coo_edge_t         coo_wdata;
  logic              raw_we;
  logic [NW-1:0]     raw_waddr, gl_raw_raddr;
  logic [31:0]       raw_wdata;
  logic [31:0]       raw_rd [2];
  logic              emb_we;
  logic [1:0]        emb_tab;
  logic [NW-1:0]     emb_waddr;
  logic [F*32-1:0]   emb_wdata;

  graph_loader #(.F(F), .MAXN(MAXN), .MAXE(MAXE), .NTAB(1)) u_gl (
    .clk, .rst_n, .start(gl_start), .desc_addr(desc_base + ADDR_W'((ctl == C_B) ? s + 16'd1 : s)),
    .busy(gl_busy), .done(gl_done), .desc(gl_desc),
    .rq_valid(gl_rq_valid), .rq_ready(rq_ready && ctl != C_WL), .rq_addr(gl_rq_addr),
    .rs_valid(rs_valid && ctl != C_WL), .rs_data,
    .coo_we, .coo_waddr, .coo_wdata, .csc_start, .csc_done,
    .raw_we, .raw_waddr, .raw_wdata, .raw_raddr(gl_raw_raddr), .raw_rdata(raw_rd[0]),
    .emb_we, .emb_tab, .emb_waddr, .emb_wdata);

  logic [NW-1:0] mp_ptr_addr;
  logic [EW-1:0] mp_ptr_data, mp_e_addr;
  logic [15:0]   mp_e_src;
  fp32_t         mp_e_val;
  logic [EW-1:0] csc_ptr [1];
  logic [15:0]   csc_src [1];
  fp32_t         csc_val [1];
  assign mp_ptr_data = csc_ptr[0];
  assign mp_e_src    = csc_src[0];
  assign mp_e_val    = csc_val[0];

  coo2csc #(.MAXN(MAXN), .MAXE(MAXE), .NRD(1)) u_csc (
    .clk, .rst_n, .coo_we, .coo_waddr, .coo_wdata,
    .start(csc_start), .n_nodes(NW'(gl_desc.n_nodes)), .n_edges(EW'(gl_desc.n_edges)),
    .busy(csc_busy), .done(csc_done),
    .ptr_addr('{mp_ptr_addr}), .ptr_data(csc_ptr),
    .e_addr('{mp_e_addr}), .e_src(csc_src), .e_val(csc_val));

  // node-embedding ping-pong (BRAM) and raw-id ping-pong (LUTRAM)
  logic                mp_start, mp_busy, mp_done, mp_x_re;
  logic [NW-1:0]       mp_x_addr;
  logic [F-1:0][31:0]  mp_x_data;
  logic [F*32-1:0]     ne_rd [1];
  logic [NW-1:0]       wb_raw_addr;
  logic                nt_phase;

  pingpong_buffer #(.WIDTH(F*32), .DEPTH(MAXN), .NRD(1), .REG_RD(1'b1)) u_ne_buf (
    .clk, .we(emb_we), .wr_bank(gl_bank), .waddr(emb_waddr), .wdata(emb_wdata),
    .re('{mp_x_re}), .rd_bank('{s[0]}), .raddr('{mp_x_addr}), .rdata(ne_rd));
  assign mp_x_data = ne_rd[0];

  // read port 0 is the loader reading back what it is writing (same bank by
  // design, so not a conflict); port 1 is the write-back of NT(s)
  pingpong_buffer #(.WIDTH(32), .DEPTH(MAXN), .NRD(2), .REG_RD(1'b0)) u_raw_buf (
    .clk, .we(raw_we), .wr_bank(gl_bank), .waddr(raw_waddr), .wdata(raw_wdata),
    .re('{1'b0, nt_phase}), .rd_bank('{gl_bank, s[0]}),
    .raddr('{gl_raw_raddr, wb_raw_addr}), .rdata(raw_rd));

  // message passing -> aggregate buffer
  logic                mp_out_valid;
  logic [NW-1:0]       mp_out_node;
  logic [F-1:0][31:0]  mp_out_vec;

  gcn_mp #(.F(F), .MAXN(MAXN), .MAXE(MAXE)) u_mp (
    .clk, .rst_n, .start(mp_start), .n_nodes(cur_n), .busy(mp_busy), .done(mp_done),
    .ptr_addr(mp_ptr_addr), .ptr_data(mp_ptr_data), .e_addr(mp_e_addr),
    .e_src(mp_e_src), .e_val(mp_e_val),
    .x_re(mp_x_re), .x_addr(mp_x_addr), .x_data(mp_x_data),
    .out_valid(mp_out_valid), .out_ready(1'b1), .out_node(mp_out_node), .out_vec(mp_out_vec));

  logic [NW-1:0]   agg_raddr;
  logic [F*32-1:0] agg_rd [1];
  ram_1w_nr #(.WIDTH(F*32), .DEPTH(MAXN), .NRD(1), .REG_RD(1'b1)) u_agg (
    .clk, .we(mp_out_valid), .waddr(mp_out_node), .wdata(mp_out_vec),
    .raddr('{agg_raddr}), .rdata(agg_rd));

  // weight ping-pong (LUTRAM): ports 0..3 RNN stages, port 4 NT
  logic                w_we, w_bank;
  logic [FW-1:0]       w_waddr;
  logic [F*32-1:0]     w_wdata;
  logic [FW-1:0]       rnn_h_addr [4];
  logic [F-1:0][31:0]  rnn_h_row  [4];
  logic [FW-1:0]       nt_w_addr;
  logic [F*32-1:0]     w_rd [5];
  logic                rnn_start, rnn_clr, rnn_busy, rnn_done, rnn_we;
  logic [FW-1:0]       rnn_waddr;
  logic [F-1:0][31:0]  rnn_wdata;
  logic [2:0]          rnn_fifo_stall;

  pingpong_buffer #(.WIDTH(F*32), .DEPTH(F), .NRD(5), .REG_RD(1'b0)) u_w_buf (
    .clk, .we(w_we), .wr_bank(w_bank), .waddr(w_waddr), .wdata(w_wdata),
    .re('{rnn_busy, rnn_busy, rnn_busy, rnn_busy, nt_phase}),
    .rd_bank('{wbank_rd, wbank_rd, wbank_rd, wbank_rd, ~s[0]}),
    .raddr('{rnn_h_addr[0], rnn_h_addr[1], rnn_h_addr[2], rnn_h_addr[3], nt_w_addr}),
    .rdata(w_rd));

  for (genvar g = 0; g < 4; g++) begin : g_hrow
    assign rnn_h_row[g] = w_rd[g];
  end

  assign w_we    = (ctl == C_WL) ? (rs_valid && wl_blk == 4'd0) : rnn_we;
  assign w_bank  = (ctl == C_WL) ? 1'b0 : ~wbank_rd;
  assign w_waddr = (ctl == C_WL) ? wl_row : rnn_waddr;
  assign w_wdata = (ctl == C_WL) ? rs_data[F*32-1:0] : rnn_wdata;

  rnn_weight_pe #(.F(F)) u_rnn (
    .clk, .rst_n, .start(rnn_start), .clr_cell(rnn_clr), .busy(rnn_busy), .done(rnn_done),
    .prm_we(ctl == C_WL && rs_valid && wl_blk != 4'd0),
    .prm_sel((wl_blk >= 4'd5) ? {1'b1, 2'(wl_blk - 4'd5)} : {1'b0, 2'(wl_blk - 4'd1)}),
    .prm_row(wl_row), .prm_data(rs_data[F*32-1:0]),
    .h_addr(rnn_h_addr), .h_row(rnn_h_row),
    .w_we(rnn_we), .w_addr(rnn_waddr), .w_data(rnn_wdata),
    .fifo_stall(rnn_fifo_stall));

  // node transformation fed from the aggregate buffer
  typedef enum logic [1:0] {F_IDLE, F_RD, F_VAL} feed_t;
  feed_t               fd;
  logic [NW-1:0]       fd_i, wb_cnt;
  logic                nt_in_valid, nt_in_ready, nt_busy, nt_out_valid;
  logic [NW-1:0]       nt_out_node;
  logic [F-1:0][31:0]  nt_out_vec;

  assign agg_raddr   = fd_i;
  assign nt_in_valid = (fd == F_VAL);
  assign nt_phase    = (ctl == C_B);

  gcn_nt #(.F(F), .FO(F), .MAXN(MAXN)) u_nt (
    .clk, .rst_n, .relu_en(1'b1), .busy(nt_busy),
    .in_valid(nt_in_valid), .in_ready(nt_in_ready), .in_node(fd_i), .in_vec(agg_rd[0]),
    .w_addr(nt_w_addr), .w_row(w_rd[4]),
    .out_valid(nt_out_valid), .out_ready(wr_ready), .out_node(nt_out_node), .out_vec(nt_out_vec));

  assign wb_raw_addr = nt_out_node;
  assign wr_valid    = nt_out_valid;
  assign wr_addr     = cur_out + raw_rd[1];
  assign wr_data     = DRAM_W'(nt_out_vec);

  // DRAM read mux
  assign rq_valid = (ctl == C_WL) ? wl_rq : gl_rq_valid;
  assign rq_addr  = (ctl == C_WL) ? wparam_base + wl_iss : gl_rq_addr;

  // ------------------------------------------------------------ control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctl       <= C_IDLE;
      s         <= '0;
      nsnap     <= '0;
      gl_ok     <= 1'b0;
      rnn_ok    <= 1'b0;
      mp_ok     <= 1'b0;
      nt_ok     <= 1'b0;
      cur_n     <= '0;
      cur_out   <= '0;
      wbank_rd  <= 1'b0;
      gl_bank   <= 1'b0;
      wl_iss    <= '0;
      wl_rsp    <= '0;
      wl_blk    <= '0;
      wl_row    <= '0;
      gl_start  <= 1'b0;
      rnn_start <= 1'b0;
      rnn_clr   <= 1'b0;
      mp_start  <= 1'b0;
      fd        <= F_IDLE;
      fd_i      <= '0;
      wb_cnt    <= '0;
      done      <= 1'b0;
    end else begin
      gl_start  <= 1'b0;
      rnn_start <= 1'b0;
      rnn_clr   <= 1'b0;
      mp_start  <= 1'b0;
      done      <= 1'b0;
      if (gl_done)  gl_ok  <= 1'b1;
      if (rnn_done) rnn_ok <= 1'b1;
      if (mp_done)  mp_ok  <= 1'b1;

      // NT feeder and write-back counter (phase B)
      unique case (fd)
        F_IDLE: ;
        F_RD:   fd <= F_VAL;
        F_VAL:  if (nt_in_ready) begin
          if (fd_i == cur_n - 1'b1) fd <= F_IDLE;
          else begin
            fd_i <= fd_i + 1'b1;
            fd   <= F_RD;
          end
        end
        default: fd <= F_IDLE;
      endcase
      if (wr_valid && wr_ready) begin
        wb_cnt <= wb_cnt + 1'b1;
        if (wb_cnt == cur_n - 1'b1) nt_ok <= 1'b1;
      end

      unique case (ctl)
        C_IDLE: if (start && n_snap != '0) begin
          nsnap  <= n_snap;
          s      <= '0;
          wl_iss <= '0;
          wl_rsp <= '0;
          wl_blk <= '0;
          wl_row <= '0;
          ctl    <= C_WL;
        end
        C_WL: begin
          if (wl_rq && rq_ready) wl_iss <= wl_iss + 1'b1;
          if (rs_valid) begin
            wl_rsp <= wl_rsp + 1'b1;
            if (wl_row == FW'(F - 1)) begin
              wl_row <= '0;
              wl_blk <= wl_blk + 1'b1;
            end else wl_row <= wl_row + 1'b1;
            if (wl_rsp == ADDR_W'(WL_WORDS - 1)) begin
              // prologue: GL(0) || RNN(0)
              ctl       <= C_PRO;
              gl_bank   <= 1'b0;
              wbank_rd  <= 1'b0;
              gl_start  <= 1'b1;
              rnn_start <= 1'b1;
              rnn_clr   <= 1'b1;
              gl_ok     <= 1'b0;
              rnn_ok    <= 1'b0;
            end
          end
        end
        C_PRO: if (gl_ok && rnn_ok) begin
          // phase A of s = 0: MP(0) || RNN(1)
          ctl      <= C_A;
          cur_n    <= NW'(gl_desc.n_nodes);
          cur_out  <= gl_desc.out_base;
          mp_start <= 1'b1;
          mp_ok    <= 1'b0;
          rnn_ok   <= last_s;
          if (!last_s) begin
            rnn_start <= 1'b1;
            wbank_rd  <= 1'b1;
          end
        end
        C_A: if (mp_ok && rnn_ok) begin
          // phase B: NT(s) || GL(s+1)
          ctl    <= C_B;
          fd_i   <= '0;
          fd     <= (cur_n == '0) ? F_IDLE : F_RD;
          wb_cnt <= '0;
          nt_ok  <= (cur_n == '0);
          gl_ok  <= last_s;
          if (!last_s) begin
            gl_start <= 1'b1;
            gl_bank  <= ~s[0];
          end
        end
        C_B: if (nt_ok && gl_ok) begin
          if (last_s) begin
            ctl  <= C_IDLE;
            done <= 1'b1;
          end else begin
            // phase A of s+1: MP(s+1) || RNN(s+2)
            s        <= s + 1'b1;
            ctl      <= C_A;
            cur_n    <= NW'(gl_desc.n_nodes);
            cur_out  <= gl_desc.out_base;
            mp_start <= 1'b1;
            mp_ok    <= 1'b0;
            rnn_ok   <= (s + 16'd2 >= nsnap);
            if (s + 16'd2 < nsnap) begin
              rnn_start <= 1'b1;
              wbank_rd  <= ~wbank_rd;
            end
          end
        end
        default: ctl <= C_IDLE;
      endcase
    end
  end

  // the loader must never touch the node bank message passing is reading
  a_gl_mp_banks: assert property (@(posedge clk) disable iff (!rst_n)
                                  (gl_busy && mp_busy) |-> gl_bank != s[0]);
endmodule
