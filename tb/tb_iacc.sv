// tb_iacc: GEMM mode: after a first step with input x the output must be c*x at step c
// (c = 0..7), one cycle after the step; nonlinear mode: the input is passed one cycle late.
`timescale 1ns/1ps
module tb_iacc;
  import mugi_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic gemm, in_v, in_first; bf16_t in_val, out_val;
  iacc dut (.*);
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    gemm = 1; in_v = 0; in_first = 0; in_val = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      bf16_t x;
      x = {1'($urandom), 8'(100 + $urandom % 50), 7'($urandom)};
      for (int c = 0; c < 8; c++) begin
        @(negedge clk); in_v = 1; in_first = (c == 0); in_val = (c == 0) ? x : 16'($urandom);
        @(negedge clk); in_v = 0;
        checks++;
        if (out_val != r2bf(real'(c) * bf2r(x))) begin
          failures++; if (failures < 10) $display("FAIL %0d*%h = %h", c, x, out_val);
        end
      end
    end
    gemm = 0;
    for (int n = 0; n < 20; n++) begin
      bf16_t v; v = 16'($urandom);
      @(negedge clk); in_v = 1; in_first = 1'($urandom); in_val = v;
      @(negedge clk); in_v = 0;
      checks++; if (out_val != v) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
