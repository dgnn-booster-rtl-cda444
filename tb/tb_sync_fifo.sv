// tb_sync_fifo: random pushes and pops against a queue model. Checks data
// order, the ready/valid flags (full at DEPTH words, empty at zero) and that
// full_stall flags refused pushes.
module tb_sync_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, full_stall;
  logic [W-1:0] din, dout;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, stalls = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < ((i / 500) % 2 ? 80 : 40));
      out_ready = ($urandom_range(0, 99) < ((i / 500) % 2 ? 30 : 70));
      din       = W'($urandom);
      #1;
      checks += 3;
      if (in_ready !== (q.size() < D)) begin failures++; $display("FAIL in_ready"); end
      if (out_valid !== (q.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (full_stall !== (in_valid && q.size() == D)) begin failures++; $display("FAIL stall"); end
      if (out_valid && out_ready) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("FAIL data %h want %h", dout, q[0]); end
      end
      @(posedge clk);
      if (full_stall) stalls++;
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(din);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no full condition reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
