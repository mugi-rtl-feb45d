// tb_ififo: random values enter each cycle; column j must show the value and flags that
// entered j cycles earlier.
`timescale 1ns/1ps
module tb_ififo;
  import mugi_pkg::*;
  localparam int W = 8;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic in_v, in_first; bf16_t in_val [W];
  logic out_v [W], out_first [W]; bf16_t out_val [W];
  ififo #(.W(W)) dut (.*);
  int checks = 0, failures = 0;
  bf16_t hv [64][W]; logic hf [64]; logic hvv [64];
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    in_v = 0; in_first = 0; for (int j = 0; j < W; j++) in_val[j] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      in_v = 1'($urandom); in_first = 1'($urandom);
      for (int j = 0; j < W; j++) in_val[j] = 16'($urandom);
      hv[t] = in_val; hf[t] = in_first; hvv[t] = in_v;
      #0.5;
      for (int j = 0; j < W; j++) if (t >= j) begin
        checks++;
        if (out_val[j] != hv[t-j][j] || out_first[j] != hf[t-j] || out_v[j] != hvv[t-j]) begin
          failures++; if (failures < 10) $display("FAIL t=%0d col %0d", t, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
