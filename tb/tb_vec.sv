// tb_vec: 16-row vector array (2 values per line). Loads random per-row factors for all 8
// groups (half of them as reciprocals), then checks that every line comes out one cycle later
// with the same address and each value multiplied by its row's factor, rounded to nearest
// even (bit exact against real arithmetic); lines with scale_en low pass unchanged.
// Reciprocals are checked by scaling 1.0.
`timescale 1ns/1ps
module tb_vec;
  import mugi_pkg::*;
  import tb_util_pkg::*;
  localparam int H = 16, OL = H / 8;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic ld, ld_recip, in_v, scale_en, out_v; logic [2:0] ld_grp, in_grp;
  logic [15:0] in_addr, out_addr; bf16_t ld_data [OL], in_data [OL], out_data [OL];
  vec #(.H(H)) dut (.*);
  int checks = 0, failures = 0;
  real sc [H];
  function automatic bf16_t rnd(int lo, int span);
    return {1'($urandom), 8'(lo + $urandom % span), 7'($urandom)};
  endfunction
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    ld = 0; ld_recip = 0; in_v = 0; scale_en = 0; ld_grp = 0; in_grp = 0; in_addr = 0;
    for (int i = 0; i < OL; i++) begin ld_data[i] = 0; in_data[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // reset value is 1.0
    in_v = 1; scale_en = 1; in_grp = 3; in_data[0] = 16'h4049; in_data[1] = 16'hC2F7; in_addr = 5;
    @(negedge clk); in_v = 0;
    checks++; if (!out_v || out_addr != 5 || out_data[0] != 16'h4049 || out_data[1] != 16'hC2F7) failures++;
    for (int rep = 0; rep < 4; rep++) begin
      for (int g = 0; g < 8; g++) begin
        ld = 1; ld_grp = 3'(g); ld_recip = 1'(rep % 2);
        for (int i = 0; i < OL; i++) begin
          ld_data[i] = rnd(110, 30);
          sc[g * OL + i] = ld_recip ? 1.0 / bf2r(ld_data[i]) : bf2r(ld_data[i]);
        end
        @(negedge clk);
      end
      ld = 0;
      for (int n = 0; n < 100; n++) begin
        bf16_t e [OL];
        in_v = 1; in_grp = 3'($urandom); in_addr = 16'($urandom); scale_en = ($urandom % 4) != 0;
        for (int i = 0; i < OL; i++) begin
          in_data[i] = (n % 10 == 0) ? 16'h3F80 : rnd(110, 30);
          e[i] = scale_en ? r2bf(bf2r(in_data[i]) * (ld_recip ? bf2r(r2bf(sc[int'(in_grp) * OL + i])) : sc[int'(in_grp) * OL + i]))
                          : in_data[i];
        end
        @(negedge clk);
        checks++;
        if (!out_v || out_addr != in_addr) failures++;
        for (int i = 0; i < OL; i++) if (out_data[i] != e[i]) begin
          failures++; if (failures < 10) $display("FAIL in %h out %h exp %h", in_data[i], out_data[i], e[i]);
        end
      end
      in_v = 0; @(negedge clk);
      checks++; if (out_v) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
