// tb_rnn_weight_pe: evolves a random F x F weight matrix through three LSTM
// steps, the testbench playing the weight ping-pong buffer (read bank and
// write bank swap every step), and compares every evolved matrix with a
// double-precision model using the same piecewise-linear activations. The
// cell state is cleared before the first step only, so steps 2 and 3 check
// that it is carried. Also checks the step time, (F+2)*(F+3)+1 cycles at most.
module tb_rnn_weight_pe;
  import dgnn_pkg::*;
  import tb_fp_pkg::*;
  localparam int F = 4, FW = 2;
  logic clk = 0, rst_n = 0;
  logic start, clr_cell, busy, done, prm_we, w_we;
  logic [2:0] prm_sel, fifo_stall;
  logic [FW-1:0] prm_row, w_addr;
  logic [F-1:0][31:0] prm_data, w_data;
  logic [FW-1:0] h_addr [4];
  logic [F-1:0][31:0] h_row [4];
  logic [F-1:0][31:0] bank [2][F];
  logic rd_b;
  real A [4][F][F];
  real B [4][F][F];
  real W [F][F];
  real C [F][F];
  int checks = 0, failures = 0;

  rnn_weight_pe #(.F(F)) dut (.*);
  always #5 clk = ~clk;
  for (genvar s = 0; s < 4; s++) begin : g_rd
    assign h_row[s] = bank[rd_b][h_addr[s]];
  end
  always_ff @(posedge clk) if (w_we) bank[!rd_b][w_addr] <= w_data;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic model_step();
    real Wn [F][F];
    for (int i = 0; i < F; i++)
      for (int c = 0; c < F; c++) begin
        real p [4];
        for (int g = 0; g < 4; g++) begin
          p[g] = B[g][i][c];
          for (int k = 0; k < F; k++) p[g] += A[g][i][k] * W[k][c];
        end
        C[i][c]  = r_sig(p[1]) * C[i][c] + r_sig(p[0]) * r_tanh(p[2]);
        Wn[i][c] = r_sig(p[3]) * r_tanh(C[i][c]);
      end
    W = Wn;
  endtask

  initial begin
    int cyc;
    start = 0; clr_cell = 0; prm_we = 0; prm_sel = 0; prm_row = 0; prm_data = '0; rd_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int i = 0; i < F; i++) begin
        logic [F-1:0][31:0] ra, rb;
        for (int k = 0; k < F; k++) begin
          ra[k] = rnd_fp(0.6); rb[k] = rnd_fp(0.4);
          A[g][i][k] = fp2r(ra[k]); B[g][i][k] = fp2r(rb[k]);
        end
        @(negedge clk); prm_we = 1; prm_sel = {1'b0, 2'(g)}; prm_row = FW'(i); prm_data = ra;
        @(negedge clk); prm_we = 1; prm_sel = {1'b1, 2'(g)}; prm_row = FW'(i); prm_data = rb;
      end
    @(negedge clk); prm_we = 0;
    for (int i = 0; i < F; i++) for (int c = 0; c < F; c++) begin
      bank[0][i][c] = rnd_fp(1.0); W[i][c] = fp2r(bank[0][i][c]); C[i][c] = 0.0;
    end
    for (int step = 0; step < 3; step++) begin
      @(negedge clk); start = 1; clr_cell = (step == 0);
      @(negedge clk); start = 0; clr_cell = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      model_step();
      checks++;
      if (cyc > (F + 2) * (F + 3) + 1) begin failures++; $display("FAIL step time %0d", cyc); end
      for (int i = 0; i < F; i++) for (int c = 0; c < F; c++) begin
        checks++;
        if (!near(bank[!rd_b][i][c], W[i][c], 1e-4, 1e-4)) begin
          failures++; $display("FAIL step %0d W[%0d][%0d] %g want %g", step, i, c, fp2r(bank[!rd_b][i][c]), W[i][c]);
        end
      end
      rd_b = !rd_b;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
