// tb_fp_fma: self-checking test of the fused multiply-add unit.
// Random operands (close and far exponents, so that both alignment and
// massive cancellation occur) are compared with a reference computed in
// double precision and rounded to single; the reference rounds twice, so a
// difference of one unit in the last place is accepted for random cases.
// Directed cases (zeros, infinities, NaN, overflow, exact cancellation, a
// single rounding that a separate multiply and add would get wrong) must
// match bit for bit.
module tb_fp_fma;
  import tb_fp_pkg::*;

  logic [31:0] a, b, c, r;
  int checks = 0, failures = 0;

  fp_fma dut (.a(a), .b(b), .c(c), .r(r));

  task automatic exact(input logic [31:0] ta, tb_, tc, exp);
    a = ta; b = tb_; c = tc; #1;
    checks++;
    if (r !== exp) begin
      failures++;
      $display("FAIL exact %h*%h+%h = %h, expected %h", ta, tb_, tc, r, exp);
    end
  endtask

  task automatic near(input logic [31:0] ta, tb_, tc);
    logic [31:0] exp;
    a = ta; b = tb_; c = tc; #1;
    exp = r2f(f2r(ta) * f2r(tb_) + f2r(tc));
    checks++;
    if (ulp_diff(r, exp) > 1 && !(r[30:0] == 0 && exp[30:0] == 0)) begin
      failures++;
      if (failures < 10) $display("FAIL %h*%h+%h = %h, expected %h", ta, tb_, tc, r, exp);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Directed cases.
    exact(32'h3f800000, 32'h40000000, 32'h40400000, 32'h40a00000); // 1*2+3 = 5
    exact(32'h40000000, 32'h40400000, 32'h00000000, 32'h40c00000); // 2*3+0 = 6
    exact(32'h00000000, 32'h40400000, 32'hc0a00000, 32'hc0a00000); // 0*3-5 = -5
    exact(32'h3f800000, 32'h40000000, 32'hc0000000, 32'h00000000); // 1*2-2 = +0
    exact(32'h7f800000, 32'h3f800000, 32'h3f800000, 32'h7f800000); // inf
    exact(32'h7f800000, 32'h00000000, 32'h3f800000, 32'h7fc00000); // inf*0
    exact(32'h7f800000, 32'h3f800000, 32'hff800000, 32'h7fc00000); // inf-inf
    exact(32'h7fc00001, 32'h3f800000, 32'h3f800000, 32'h7fc00000); // NaN
    exact(32'h7f000000, 32'h7f000000, 32'h00000000, 32'h7f800000); // overflow
    exact(32'h00800000, 32'h00800000, 32'h00000000, 32'h00000000); // underflow
    exact(32'hbf800000, 32'h40000000, 32'h3f800000, 32'hbf800000); // -1*2+1 = -1
    // (1+2^-12)^2 - (1+2^-11) = 2^-24 exactly: only a fused unit gets it.
    exact(32'h3f800800, 32'h3f800800, 32'hbf801000, 32'h33800000);
    // Product far below the addend: 1 + 2^-30 rounds to 1.
    exact(32'h30800000, 32'h3f800000, 32'h3f800000, 32'h3f800000);
    // Rounding tie to even: 1 + 2^-24 = 1, 1 + 3*2^-24 = 1 + 2^-22.
    exact(32'h33800000, 32'h3f800000, 32'h3f800000, 32'h3f800000);
    exact(32'h34400000, 32'h3f800000, 32'h3f800000, 32'h3f800002);
    // Random cases: wide and narrow exponent ranges, both signs.
    for (int i = 0; i < 20000; i++) begin
      int span;
      span = (i % 3 == 0) ? 2 : ((i % 3 == 1) ? 12 : 40);
      near(rnd_f(span), rnd_f(span), rnd_f(span));
    end
    // Near-cancellation: c close to -a*b.
    for (int i = 0; i < 5000; i++) begin
      logic [31:0] x, y, z;
      x = rnd_f(3); y = rnd_f(3);
      z = r2f(-(f2r(x) * f2r(y)));
      z[3:0] = 4'($urandom);
      near(x, y, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
