// tb_m_proc: splits random BF16 values and checks sign, rounded 3-bit mantissa, exponent
// (with the rounding carry) and class against a real-valued reference: (1+m/8)*2^e must be
// the value nearest to |x| among 3-bit mantissas (ties rounded up).
`timescale 1ns/1ps
module tb_m_proc;
  import mugi_pkg::*;
  import tb_util_pkg::*;
  bf16_t x; row_op_t op;
  m_proc dut (.*);
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 3000; n++) begin
      real v, best, d, q;
      int  bm, be;
      x = {1'($urandom), 8'(1 + $urandom % 254), 7'($urandom)};
      if (n == 0) x = 16'h3FFF;   // rounding carry into the exponent
      #1;
      v = absr(bf2r(x));
      best = 1e300; bm = 0; be = 0;
      for (int e = -130; e < 130; e++) for (int m = 0; m < 8; m++) begin
        q = (1.0 + m / 8.0) * (2.0 ** e);
        d = absr(q - v);
        if (d < best || (d == best && q > (1.0 + bm / 8.0) * (2.0 ** be))) begin best = d; bm = m; be = e; end
      end
      checks++;
      if (op.s != x[15] || int'(op.m) != bm || int'(op.e) != be || op.cls != CLS_NORM || op.raw != x) begin
        failures++; if (failures < 10) $display("FAIL x=%h m=%0d e=%0d exp m=%0d e=%0d", x, op.m, int'(op.e), bm, be);
      end
    end
    x = 16'h0000; #1; checks++; if (op.cls != CLS_ZERO) failures++;
    x = 16'hFF80; #1; checks++; if (op.cls != CLS_INF)  failures++;
    x = 16'h7FC1; #1; checks++; if (op.cls != CLS_NAN)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
