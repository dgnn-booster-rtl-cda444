// rnn_weight_pe: the RNN processing element of DGNN-Booster V1, which evolves
// the GCN weight matrix from one time step to the next (EvolveGCN).
//
// The weight matrix W (F x F) is both input and hidden state of a matrix
// LSTM: for every row i,
//   I_i = sig(B_I[i] + sum_k A_I[i][k] W[k])     input gate
//   F_i = sig(B_F[i] + sum_k A_F[i][k] W[k])     forget gate
//   C_i = F_i*C_i + I_i*tanh(B_C[i] + sum_k A_C[i][k] W[k])   cell update
//   W'_i = sig(B_O[i] + sum_k A_O[i][k] W[k]) * tanh(C_i)    output gate
// Because input and hidden state are the same matrix, the input-side and
// hidden-side gate matrices are loaded pre-added as A_g = W_g + U_g.
// The four gates are four stages connected by FIFOs, one row per token, so
// the stages work on different rows at once (row-level pipelining, the
// paper's "data streaming inside RNN"). Each stage spends F cycles per row
// (F multiply-adds in parallel, one k per cycle), one cycle to hand the token
// on and one to take the next: (F+2)*(F+3)+1 cycles per evolution step from
// start to done, against 4*F*(F+2) if the stages ran one after another.
// Ports: W is read through four asynchronous read ports (one per stage) of
// the weight ping-pong buffer and the new rows are written to the other bank
// through w_we/w_addr/w_data. Gate matrices and biases are loaded through
// prm_* (prm_sel = {bias, gate}, gate 0..3 = I, F, C, O). clr_cell zeroes the
// cell state at the start of a sequence. start runs one step; done pulses
// when the last row is written.
// The stage names and their order follow the paper's figure of V1; using an
// LSTM here follows that figure, while the text names a GRU for EvolveGCN.
module rnn_weight_pe
  import dgnn_pkg::*;
#(
  parameter int unsigned F   = FEAT,
  localparam int unsigned FW = (F > 1) ? $clog2(F) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                clr_cell,
  output logic                busy,
  output logic                done,
  // parameter load
  input  logic                prm_we,
  input  logic [2:0]          prm_sel,
  input  logic [FW-1:0]       prm_row,
  input  logic [F-1:0][31:0]  prm_data,
  // previous weights, one asynchronous read port per stage
  output logic [FW-1:0]       h_addr [4],
  input  logic [F-1:0][31:0]  h_row  [4],
  // evolved weights
  output logic                w_we,
  output logic [FW-1:0]       w_addr,
  output logic [F-1:0][31:0]  w_data,
  // FIFO back-pressure events, for performance monitoring
  output logic [2:0]          fifo_stall
);
  typedef struct packed {
    logic [FW-1:0]      row;
    logic [F-1:0][31:0] a;    // I, later the new cell row
    logic [F-1:0][31:0] b;    // F
  } token_t;

  logic [F-1:0][31:0] amat [4][F];
  logic [F-1:0][31:0] bias [4][F];
  logic [F-1:0][31:0] cst [F];
  logic [F-1:0]       cst_ok;

  always_ff @(posedge clk)
    if (prm_we) begin
      if (prm_sel[2]) bias[prm_sel[1:0]][prm_row] <= prm_data;
      else            amat[prm_sel[1:0]][prm_row] <= prm_data;
    end

  // stage links: link[s] feeds stage s; link[0] is the row source
  logic   l_valid [5];
  logic   l_ready [5];
  token_t l_tok   [5];

  logic          running;
  logic [FW:0]   src_row;
  logic          c_we;
  logic [FW-1:0] c_addr;
  logic [F-1:0][31:0] c_data;

  assign l_valid[0]   = running && (src_row < (FW+1)'(F));
  assign l_tok[0]     = '{row: src_row[FW-1:0], a: '0, b: '0};
  assign busy         = running;
  assign l_ready[4]   = 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      src_row <= '0;
      done    <= 1'b0;
      cst_ok <= '0;
    end else begin
      done <= 1'b0;
      if (clr_cell) cst_ok <= '0;
      if (start && !running) begin
        running <= 1'b1;
        src_row <= '0;
      end
      if (l_valid[0] && l_ready[0]) src_row <= src_row + 1'b1;
      if (c_we) cst_ok[c_addr] <= 1'b1;
      if (l_valid[4] && l_tok[4].row == FW'(F - 1)) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (c_we) cst[c_addr] <= c_data;

  for (genvar s = 0; s < 4; s++) begin : g_stage
    typedef enum logic [1:0] {S_IDLE, S_MAC, S_OUT} st_t;
    st_t                st;
    token_t             tk, tk_out;
    logic [FW-1:0]      k;
    logic [F-1:0][31:0] acc;
    logic [F-1:0][31:0] gate;
    logic [F-1:0][31:0] arow;
    logic               in_v, out_r;
    token_t             in_t;

    // FIFO in front of stages 1..3; the row source feeds stage 0 directly
    if (s == 0) begin : g_src
      assign in_v       = l_valid[0];
      assign in_t       = l_tok[0];
      assign l_ready[0] = (st == S_IDLE);
    end else begin : g_fifo
      logic in_r;
      assign in_r = (st == S_IDLE);
      sync_fifo #(.WIDTH($bits(token_t)), .DEPTH(2)) u_fifo (
        .clk, .rst_n,
        .in_valid(l_valid[s]), .in_ready(l_ready[s]), .din(l_tok[s]),
        .out_valid(in_v), .out_ready(in_r), .dout(in_t),
        .full_stall(fifo_stall[s-1]));
    end

    assign arow      = amat[s][tk.row];
    assign h_addr[s] = k;
    assign out_r     = l_ready[s+1];

    always_comb begin
      for (int c = 0; c < F; c++)
        gate[c] = (s == 2) ? fp_tanh(acc[c]) : fp_sigmoid(acc[c]);
      tk_out = tk;
      unique case (s)
        0: tk_out.a = gate;
        1: tk_out.b = gate;
        2: for (int c = 0; c < F; c++)
             tk_out.a[c] = fp_add(fp_mul(tk.b[c], cst_ok[tk.row] ? cst[tk.row][c] : FP_ZERO),
                                  fp_mul(tk.a[c], gate[c]));
        default: for (int c = 0; c < F; c++)
             tk_out.a[c] = fp_mul(gate[c], fp_tanh(tk.a[c]));
      endcase
    end

    assign l_valid[s+1] = (st == S_OUT);
    assign l_tok[s+1]   = tk_out;

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        st  <= S_IDLE;
        k   <= '0;
        tk  <= '0;
        acc <= '0;
      end else begin
        unique case (st)
          S_IDLE: if (in_v) begin
            tk  <= in_t;
            acc <= bias[s][in_t.row];
            k   <= '0;
            st  <= S_MAC;
          end
          S_MAC: begin
            for (int c = 0; c < F; c++) acc[c] <= fp_mac(arow[k], h_row[s][c], acc[c]);
            if (k == FW'(F - 1)) st <= S_OUT;
            else k <= k + 1'b1;
          end
          S_OUT: if (out_r) st <= S_IDLE;
          default: st <= S_IDLE;
        endcase
      end
    end
  end

  // cst-state write by the cst-update stage, weight write by the output stage
  assign c_we   = l_valid[3] && l_ready[3];
  assign c_addr = l_tok[3].row;
  assign c_data = l_tok[3].a;
  assign w_we   = l_valid[4];
  assign w_addr = l_tok[4].row;
  assign w_data = l_tok[4].a;
endmodule
