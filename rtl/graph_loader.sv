// graph_loader: graph loading (GL) of one snapshot from DRAM into the
// on-chip buffers, including the COO-to-CSC conversion.
//
// Started with the DRAM address of a snapshot descriptor (written by the
// host), it runs four phases, each issuing one DRAM read per word and
// accepting the in-order responses as they come:
//   DESC   read the descriptor (node and edge counts, table addresses)
//   EDGE   copy the COO edge list into the converter, then start it
//   RENUM  copy the renumbering table (local id -> raw id) into the raw-id
//          buffer
//   EMB    for every local node i, for each of NTAB tables, read the row at
//          table_base + raw_id[i] and write it to local slot i
// and finishes when the EMB responses are in and the converter is done (the
// conversion runs in parallel with RENUM and EMB). NTAB is 1 for V1 (node
// embedding only) and 3 for V2 (input embedding, LSTM hidden and cell state,
// whose tables are ne_base, out_base and c_base of the descriptor).
// The gather through the renumbering table is how the snapshot comes to sit
// in a contiguous on-chip region, as the paper describes; the descriptor
// layout and the one-word-per-item DRAM format are this design's own.
// DRAM read protocol: a request moves when rq_valid && rq_ready; responses
// come back in request order, one per rs_valid cycle, and are always accepted.
module graph_loader
  import dgnn_pkg::*;
#(
  parameter int unsigned F    = FEAT,
  parameter int unsigned MAXN = MAX_NODES,
  parameter int unsigned MAXE = MAX_EDGES,
  parameter int unsigned NTAB = 1,
  localparam int unsigned NW  = $clog2(MAXN + 1),
  localparam int unsigned EW  = $clog2(MAXE + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [ADDR_W-1:0]  desc_addr,
  output logic               busy,
  output logic               done,
  output snap_desc_t         desc,
  // DRAM read port
  output logic               rq_valid,
  input  logic               rq_ready,
  output logic [ADDR_W-1:0]  rq_addr,
  input  logic               rs_valid,
  input  logic [DRAM_W-1:0]  rs_data,
  // to the COO-to-CSC converter
  output logic               coo_we,
  output logic [EW-1:0]      coo_waddr,
  output coo_edge_t          coo_wdata,
  output logic               csc_start,
  input  logic               csc_done,
  // raw-id buffer (renumbering table copy), write and asynchronous read
  output logic               raw_we,
  output logic [NW-1:0]      raw_waddr,
  output logic [31:0]        raw_wdata,
  output logic [NW-1:0]      raw_raddr,
  input  logic [31:0]        raw_rdata,
  // node-embedding buffers
  output logic               emb_we,
  output logic [1:0]         emb_tab,
  output logic [NW-1:0]      emb_waddr,
  output logic [F*32-1:0]    emb_wdata
);
  typedef enum logic [2:0] {P_IDLE, P_DESC, P_EDGE, P_RENUM, P_EMB, P_WAIT} phase_t;

  phase_t        ph;
  logic [EW-1:0] iss, rsp;          // issued / received items of the phase
  logic [1:0]    iss_tab, rsp_tab;  // table index within a node (EMB)
  logic [EW-1:0] tot;               // items (nodes for EMB) of the phase
  logic          csc_pend;
  logic [31:0]   tab_base;

  assign busy = (ph != P_IDLE);

  always_comb begin
    unique case (ph)
      P_DESC:  tot = EW'(1);
      P_EDGE:  tot = EW'(desc.n_edges);
      default: tot = EW'(desc.n_nodes);
    endcase
    unique case (iss_tab)
      2'd0:    tab_base = desc.ne_base;
      2'd1:    tab_base = desc.out_base;
      default: tab_base = desc.c_base;
    endcase
    raw_raddr = iss[NW-1:0];
    rq_valid  = (ph == P_DESC || ph == P_EDGE || ph == P_RENUM || ph == P_EMB) && (iss < tot);
    unique case (ph)
      P_DESC:  rq_addr = desc_addr;
      P_EDGE:  rq_addr = desc.edge_base + ADDR_W'(iss);
      P_RENUM: rq_addr = desc.renum_base + ADDR_W'(iss);
      default: rq_addr = tab_base + raw_rdata;
    endcase
  end

  // response routing
  always_comb begin
    coo_we    = rs_valid && ph == P_EDGE;
    coo_waddr = rsp;
    coo_wdata = rs_data[$bits(coo_edge_t)-1:0];
    raw_we    = rs_valid && ph == P_RENUM;
    raw_waddr = rsp[NW-1:0];
    raw_wdata = rs_data[31:0];
    emb_we    = rs_valid && ph == P_EMB;
    emb_tab   = rsp_tab;
    emb_waddr = rsp[NW-1:0];
    emb_wdata = rs_data[F*32-1:0];
  end

  logic last_rsp;
  assign last_rsp = rs_valid && (rsp == tot - 1'b1) &&
                    (ph != P_EMB || rsp_tab == 2'(NTAB - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ph        <= P_IDLE;
      iss       <= '0;
      rsp       <= '0;
      iss_tab   <= '0;
      rsp_tab   <= '0;
      csc_pend  <= 1'b0;
      csc_start <= 1'b0;
      done      <= 1'b0;
      desc      <= '0;
    end else begin
      done      <= 1'b0;
      csc_start <= 1'b0;
      if (csc_done) csc_pend <= 1'b0;
      // issue side
      if (rq_valid && rq_ready) begin
        if (ph == P_EMB && iss_tab != 2'(NTAB - 1)) iss_tab <= iss_tab + 1'b1;
        else begin
          iss_tab <= '0;
          iss     <= iss + 1'b1;
        end
      end
      // response side
      if (rs_valid) begin
        if (ph == P_DESC) desc <= rs_data[$bits(snap_desc_t)-1:0];
        if (ph == P_EMB && rsp_tab != 2'(NTAB - 1)) rsp_tab <= rsp_tab + 1'b1;
        else begin
          rsp_tab <= '0;
          rsp     <= rsp + 1'b1;
        end
      end
      // phase sequencing
      unique case (ph)
        P_IDLE: if (start) begin
          ph  <= P_DESC;
          iss <= '0;
          rsp <= '0;
        end
        P_DESC: if (last_rsp) begin
          iss <= '0;
          rsp <= '0;
          ph  <= P_EDGE;
        end
        P_EDGE: if (last_rsp || tot == '0) begin
          iss       <= '0;
          rsp       <= '0;
          csc_start <= 1'b1;
          csc_pend  <= 1'b1;
          ph        <= P_RENUM;
        end
        P_RENUM: if (last_rsp || tot == '0) begin
          iss <= '0;
          rsp <= '0;
          ph  <= P_EMB;
        end
        P_EMB: if (last_rsp || tot == '0) begin
          iss     <= '0;
          rsp     <= '0;
          iss_tab <= '0;
          rsp_tab <= '0;
          ph      <= P_WAIT;
        end
        P_WAIT: if (!csc_pend && !csc_start) begin
          done <= 1'b1;
          ph   <= P_IDLE;
        end
        default: ph <= P_IDLE;
      endcase
    end
  end

  a_no_stray_resp: assert property (@(posedge clk) disable iff (!rst_n)
                                    rs_valid |-> (ph != P_IDLE && ph != P_WAIT));
endmodule
