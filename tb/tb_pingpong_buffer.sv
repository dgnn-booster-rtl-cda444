// tb_pingpong_buffer: fills both banks with different data, then reads both
// through a registered-read (BRAM-like) instance and an asynchronous-read
// (LUTRAM-like) instance, including one port reading bank 0 while the other
// reads bank 1, and a write to one bank while the other is read.
module tb_pingpong_buffer;
  localparam int W = 32, D = 16;
  logic clk = 0;
  logic we, wr_bank;
  logic [3:0] waddr;
  logic [W-1:0] wdata;
  logic re [2];
  logic rd_bank [2];
  logic [3:0] raddr [2];
  logic [W-1:0] rs [2];
  logic [W-1:0] ra [2];
  int checks = 0, failures = 0;

  pingpong_buffer #(.WIDTH(W), .DEPTH(D), .NRD(2), .REG_RD(1'b1)) u_sync (
    .clk, .we, .wr_bank, .waddr, .wdata, .re, .rd_bank, .raddr, .rdata(rs));
  pingpong_buffer #(.WIDTH(W), .DEPTH(D), .NRD(2), .REG_RD(1'b0)) u_async (
    .clk, .we, .wr_bank, .waddr, .wdata, .re, .rd_bank, .raddr, .rdata(ra));

  always #5 clk = ~clk;

  function automatic logic [W-1:0] pat(int bank, int a, int pass);
    return W'(32'hA000_0000 + bank * 32'h0100_0000 + pass * 32'h1000 + a);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wr_bank = 0; waddr = 0; wdata = 0;
    re = '{0, 0}; rd_bank = '{0, 1}; raddr = '{0, 0};
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk); we = 1; wr_bank = 1'(b); waddr = 4'(a); wdata = pat(b, a, 0);
      end
    @(negedge clk); we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        re = '{1, 1}; rd_bank = '{1'(pass), 1'(1 - pass)}; raddr = '{4'(a), 4'(D - 1 - a)};
        // meanwhile rewrite the bank nobody reads in the second pass
        we = 0;
        #1;
        checks += 2;
        if (ra[0] !== pat(pass, a, 0))         begin failures++; $display("FAIL async p0"); end
        if (ra[1] !== pat(1 - pass, D - 1 - a, 0)) begin failures++; $display("FAIL async p1"); end
        @(posedge clk); #1;
        checks += 2;
        if (rs[0] !== pat(pass, a, 0))         begin failures++; $display("FAIL sync p0 %h", rs[0]); end
        if (rs[1] !== pat(1 - pass, D - 1 - a, 0)) begin failures++; $display("FAIL sync p1 %h", rs[1]); end
      end
    end
    // swap: write bank 0 while both ports read bank 1
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; wr_bank = 0; waddr = 4'(a); wdata = pat(0, a, 1);
      re = '{1, 1}; rd_bank = '{1, 1}; raddr = '{4'(a), 4'(a)};
      #1; checks++;
      if (ra[0] !== pat(1, a, 0)) begin failures++; $display("FAIL read during write"); end
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); rd_bank = '{0, 0}; raddr = '{4'(a), 4'(a)};
      @(posedge clk); #1; checks++;
      if (rs[0] !== pat(0, a, 1)) begin failures++; $display("FAIL rewritten bank"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
