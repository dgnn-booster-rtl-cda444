// tb_act_unit: sweeps the activation unit over [-8, 8] and compares ReLU,
// the piecewise-linear sigmoid and tanh, and identity with double-precision
// references; also checks a few exact segment points (sigmoid(0) = 0.5,
// sigmoid(1) = 0.75, sigmoid(6) = 1).
module tb_act_unit;
  import tb_fp_pkg::*;
  logic [1:0]  op;
  logic [31:0] x, y;
  int checks = 0, failures = 0;

  act_unit dut (.op, .x, .y);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = 2'd1;
    x = 32'h00000000; #1; checks++; if (y !== 32'h3F000000) failures++;
    x = 32'h3F800000; #1; checks++; if (y !== 32'h3F400000) failures++;
    x = 32'h40C00000; #1; checks++; if (y !== 32'h3F800000) failures++;
    for (int i = -800; i <= 800; i += 3) begin
      real r, want;
      r = real'(i) / 100.0;
      x = r2fp(r);
      for (int o = 0; o < 4; o++) begin
        op = 2'(o); #1;
        case (o)
          0: want = r_relu(fp2r(x));
          1: want = r_sig(fp2r(x));
          2: want = r_tanh(fp2r(x));
          default: want = fp2r(x);
        endcase
        checks++;
        if (!near(y, want, 1e-6, 1e-6)) begin
          failures++; $display("FAIL op%0d x=%g y=%g want %g", o, fp2r(x), fp2r(y), want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
