// tb_mugi_pkg: checks the arithmetic functions of mugi_pkg against real arithmetic:
// BF16 multiply and reciprocal, FP32 add, FP32->BF16 rounding and the exact c*x multiple
// of the input accumulator, on random operands and a few special values.
`timescale 1ns/1ps
module tb_mugi_pkg;
  import mugi_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [15:0] rbf(input int lo, input int hi);
    return {1'($urandom), 8'(127 + lo + int'($urandom % (hi - lo + 1))), 7'($urandom)};
  endfunction

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [15:0] a, b, y;
      logic [31:0] fa, fb, fy;
      real ra, rb, ref_v;
      a = rbf(-20, 20); b = rbf(-20, 20);
      ra = bf2r(a); rb = bf2r(b);
      // multiply: the correctly rounded product
      y = bf16_mul(a, b);
      check(y == r2bf(ra * rb), $sformatf("mul %h*%h=%h exp %h", a, b, y, r2bf(ra * rb)));
      // reciprocal: within half an ulp plus rounding of the reference
      y = bf16_recip(a);
      check(absr(bf2r(y) - 1.0 / ra) <= absr(1.0 / ra) / 256.0 * 1.01,
            $sformatf("recip %h=%h", a, y));
      // c * x
      for (int c = 0; c < 8; c++) begin
        y = bf16_mul_small(a, 3'(c));
        check(y == r2bf(real'(c) * ra), $sformatf("small %0d*%h=%h", c, a, y));
      end
      // FP32 add of two BF16-exact values: exact sum fits in double, compare to 2^-23 rel
      fa = bf16_to_fp32(a); fb = bf16_to_fp32(rbf(-20, 20));
      fy = fp32_add(fa, fb);
      ref_v = bf2r(fa[31:16]) + bf2r(fb[31:16]);
      check(absr(f2r(fy) - ref_v) <= absr(ref_v) * 1.2e-7 + 1e-30,
            $sformatf("add %h+%h=%h", fa, fb, fy));
      // rounding FP32 -> BF16 agrees with the reference rounding
      check(fp32_to_bf16(fy) == r2bf(f2r(fy)), $sformatf("round %h", fy));
    end
    // special values
    check(bf16_mul(16'h7F80, 16'h0000) == BF16_NAN, "inf*0");
    check(bf16_mul(16'h7F80, 16'hBF80) == 16'hFF80, "inf*-1");
    check(bf16_recip(16'h0000) == BF16_INF, "1/0");
    check(bf16_recip(16'h4000) == 16'h3F00, "1/2");
    check(fp32_add(32'h3F800000, 32'hBF800000) == 32'd0, "1-1");
    check(fp32_add(32'h7F800000, 32'hFF800000) == 32'h7FC00000, "inf-inf");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
