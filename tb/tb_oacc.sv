// tb_oacc: GEMM: K mappings of 8 beats each, alternating OR sets and overlapping by a few
// cycles; the last mapping must offer sum_k beat_k[b] for every column b (checked against
// real arithmetic). Nonlinear: random result pulses on both sets, sometimes together; the
// row sum must match, and clr must zero it.
`timescale 1ns/1ps
module tb_oacc;
  import mugi_pkg::*;
  import tb_util_pkg::*;
  localparam int W = 8, K = 5;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic gemm, clr; logic [1:0] bv, first, last, rv, fin_en;
  logic [2:0] bidx [2], fin_col [2]; bf16_t bdata [2], rdata [2], fin_data [2], sum;
  oacc #(.W(W)) dut (.*);
  int checks = 0, failures = 0;
  real ref_v [W]; int got_n;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) for (int p = 0; p < 2; p++) if (fin_en[p]) begin
    checks++; got_n++;
    if (absr(bf2r(fin_data[p]) - ref_v[fin_col[p]]) > 0.01 * absr(ref_v[fin_col[p]]) + 1e-3) begin
      failures++; $display("FAIL col %0d got %g exp %g", fin_col[p], bf2r(fin_data[p]), ref_v[fin_col[p]]);
    end
  end
  initial begin
    gemm = 1; clr = 0; bv = 0; first = 0; last = 0; rv = 0;
    for (int p = 0; p < 2; p++) begin bidx[p] = 0; bdata[p] = 0; rdata[p] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 10; rep++) begin
      bf16_t b [K][W];
      for (int j = 0; j < W; j++) ref_v[j] = 0.0;
      for (int k = 0; k < K; k++) for (int j = 0; j < W; j++) begin
        b[k][j] = {1'($urandom), 8'(125 + $urandom % 4), 7'($urandom)};
        ref_v[j] += bf2r(b[k][j]);
      end
      got_n = 0;
      // mapping k on set k%2 starts at cycle 5k and lasts 8 cycles
      for (int t = 0; t < 5 * (K - 1) + 8; t++) begin
        @(negedge clk);
        bv = 0;
        for (int k = 0; k < K; k++) if (t >= 5*k && t < 5*k + 8) begin
          bv[k%2] = 1; bidx[k%2] = 3'(t - 5*k); bdata[k%2] = b[k][t - 5*k];
          first[k%2] = (k == 0); last[k%2] = (k == K - 1);
        end
      end
      @(negedge clk); bv = 0; @(negedge clk);
      checks++; if (got_n != W) begin failures++; $display("FAIL %0d finals", got_n); end
    end
    // nonlinear row sum
    gemm = 0; @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    begin
      real s; s = 0.0;
      for (int n = 0; n < 50; n++) begin
        @(negedge clk);
        rv = 2'($urandom);
        for (int p = 0; p < 2; p++) begin
          rdata[p] = {1'b0, 8'(120 + $urandom % 8), 7'($urandom)};
          if (rv[p]) s += bf2r(rdata[p]);
        end
      end
      @(negedge clk); rv = 0; @(negedge clk);
      checks++; if (absr(bf2r(sum) - s) > 0.005 * s) begin failures++; $display("FAIL sum %g exp %g", bf2r(sum), s); end
      clr = 1; @(negedge clk); clr = 0; @(negedge clk);
      checks++; if (sum != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
