// tb_pp: loads an exponent index (or a special code) for a phase, then feeds the 8-beat
// stream of that phase; the result must be the beat whose index equals the exponent index,
// reported once on rv, or the special value right after the load.
`timescale 1ns/1ps
module tb_pp;
  import mugi_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic ld, ld_ph; logic [2:0] ld_idx; spec_e ld_spec; bf16_t ld_raw;
  logic [1:0] bv, rv; logic [2:0] bidx [2]; bf16_t bdata [2]; bf16_t res [2]; bf16_t rdata [2];
  pp dut (.*);
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    ld = 0; ld_ph = 0; ld_idx = 0; ld_spec = SP_NONE; ld_raw = 0; bv = 0;
    bidx[0] = 0; bidx[1] = 0; bdata[0] = 0; bdata[1] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      logic p; int idx, nrv; spec_e sp; bf16_t beats [8], expv;
      p = 1'($urandom); idx = $urandom % 8; sp = ($urandom % 4 == 0) ? spec_e'(1 + $urandom % 4) : SP_NONE;
      @(negedge clk); ld = 1; ld_ph = p; ld_idx = 3'(idx); ld_spec = sp; ld_raw = 16'($urandom);
      case (sp) SP_ZERO: expv = 0; SP_INF: expv = 16'h7F80; SP_NAN: expv = 16'h7FC0; SP_PASS: expv = ld_raw; default: expv = 0; endcase
      nrv = 0;
      @(negedge clk); ld = 0; ld_idx = 3'($urandom); if (rv[p]) nrv++;
      for (int b = 0; b < 8; b++) begin
        beats[b] = 16'($urandom);
        bv = 0; bv[p] = 1; bidx[p] = 3'(b); bdata[p] = beats[b];
        bv[~p] = 1; bidx[~p] = 3'(idx); bdata[~p] = 16'($urandom);   // the other set must not matter
        @(negedge clk); if (rv[p]) nrv++;
      end
      bv = 0; @(negedge clk); if (rv[p]) nrv++;
      if (sp == SP_NONE) expv = beats[idx];
      checks++;
      if (res[p] != expv || nrv != 1) begin failures++; if (failures < 10) $display("FAIL n=%0d res %h exp %h nrv %0d", n, res[p], expv, nrv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
