// tb_pe: a spike must come out of the T register one cycle later with its phase and sign,
// and while it is there the PE passes the column value on the OR set of its phase only,
// with its column index; with no spike both outputs are zero.
`timescale 1ns/1ps
module tb_pe;
  import mugi_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic t_in, ph_in, s_in, t_out, ph_out, s_out; bf16_t val; logic [1:0] hit;
  bf16_t sub [2]; logic [2:0] sidx [2];
  pe #(.IDX(5)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    t_in = 0; ph_in = 0; s_in = 0; val = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      logic t, p, s;
      t = 1'($urandom); p = 1'($urandom); s = 1'($urandom);
      @(negedge clk); t_in = t; ph_in = p; s_in = s;
      @(negedge clk); t_in = 0; val = 16'($urandom); #0.5;
      checks++;
      if (t_out != t || (t && (ph_out != p || s_out != s))) failures++;
      for (int q = 0; q < 2; q++) begin
        checks++;
        if (sub[q] != ((t && p == q[0]) ? val : 16'h0) || sidx[q] != ((t && p == q[0]) ? 3'd5 : 3'd0))
          begin failures++; if (failures < 10) $display("FAIL n=%0d q=%0d", n, q); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
