// tb_fp32_mac: checks the single-precision multiply-add against double
// precision. Directed cases check exact results (exact products and sums,
// cancellation to zero, zero operands, overflow to infinity); random cases
// check that the product is within half an ulp and the sum within the
// rounding error of two roundings.
module tb_fp32_mac;
  import tb_fp_pkg::*;
  logic [31:0] a, b, c, prod, y;
  int checks = 0, failures = 0;

  fp32_mac dut (.a, .b, .c, .prod, .y);

  task automatic exact(logic [31:0] ta, tb_, tc, logic [31:0] want_p, want_y);
    a = ta; b = tb_; c = tc; #1;
    checks += 2;
    if (prod !== want_p) begin failures++; $display("FAIL prod %h*%h = %h want %h", ta, tb_, prod, want_p); end
    if (y !== want_y)    begin failures++; $display("FAIL mac %h*%h+%h = %h want %h", ta, tb_, tc, y, want_y); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exact(32'h3FC00000, 32'h40000000, 32'h3E800000, 32'h40400000, 32'h40500000); // 1.5*2+0.25
    exact(32'h40400000, 32'hC0000000, 32'h40C00000, 32'hC0C00000, 32'h00000000); // 3*-2+6 = 0
    exact(32'h00000000, 32'h40000000, 32'h3F800000, 32'h00000000, 32'h3F800000); // 0*2+1
    exact(32'h3F800000, 32'h3F800000, 32'h3F800000, 32'h3F800000, 32'h40000000); // 1*1+1
    exact(32'h7F000000, 32'h7F000000, 32'h00000000, 32'h7F800000, 32'h7F800000); // overflow
    exact(32'h3F800001, 32'h3F800000, 32'hBF800000, 32'h3F800001, 32'h34000000); // 1+ulp - 1
    for (int i = 0; i < 3000; i++) begin
      real ra, rb, rc, rp;
      a = rnd_fp(100.0); b = rnd_fp(10.0); c = rnd_fp((i % 3 == 0) ? 1000.0 : 1.0);
      #1;
      ra = fp2r(a); rb = fp2r(b); rc = fp2r(c); rp = ra * rb;
      checks += 2;
      if (!near(prod, rp, 1e-30, 6.0e-8)) begin
        failures++; $display("FAIL prod %h*%h = %h (%g want %g)", a, b, prod, fp2r(prod), rp);
      end
      if (r_abs(fp2r(y) - (rp + rc)) > 1.2e-7 * (r_abs(rp) + r_abs(rc)) + 1e-30) begin
        failures++; $display("FAIL mac %g*%g+%g = %g", ra, rb, rc, fp2r(y));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
