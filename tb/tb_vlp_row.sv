// tb_vlp_row: random column values every cycle; spikes enter every 5 cycles with
// alternating phase (so two are in the row at once). On the OR set of its phase, a spike
// entering at cycle t0 must deliver beat b at t0+2+b: the value column b carried at t0+1+b,
// with the sign flipped when the spike's sign is set and GEMM mode was on in that cycle.
`timescale 1ns/1ps
module tb_vlp_row;
  import mugi_pkg::*;
  localparam int W = 8, T = 200;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic gemm, spike, spike_ph, spike_s; bf16_t col_val [W];
  logic [1:0] bv; logic [2:0] bidx [2]; bf16_t bdata [2];
  vlp_row #(.W(W)) dut (.*);
  int checks = 0, failures = 0;
  bf16_t hist [T][W]; logic hs [T]; logic hp [T]; logic hsg [T]; logic hg [T];
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    gemm = 1; spike = 0; spike_ph = 0; spike_s = 0;
    for (int j = 0; j < W; j++) col_val[j] = '0;
    for (int t = 0; t < T; t++) begin hs[t] = 0; hp[t] = 0; hsg[t] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      if (t == T/2) gemm = 0;
      spike = (t % 5 == 0) && t < T - 20; spike_ph = 1'((t / 5) % 2); spike_s = 1'($urandom);
      for (int j = 0; j < W; j++) col_val[j] = 16'($urandom);
      hist[t] = col_val; hg[t] = gemm; hs[t] = spike; hp[t] = spike_ph; hsg[t] = spike_s;
      #0.5;
      // check the registered outputs present in this cycle
      for (int p = 0; p < 2; p++) begin
        logic ev; bf16_t ed; int eb;
        ev = 0; ed = 0; eb = 0;
        for (int t0 = t - 9; t0 <= t - 2; t0++)
          if (t0 >= 0 && hs[t0] && hp[t0] == p[0]) begin
            eb = t - t0 - 2; ev = 1;
            ed = hist[t-1][eb];
            if (hg[t-1] && hsg[t0]) ed[15] = ~ed[15];
          end
        checks++;
        if (bv[p] != ev || (ev && (bdata[p] != ed || int'(bidx[p]) != eb))) begin
          failures++; if (failures < 10) $display("FAIL t=%0d p=%0d bv=%b exp %b data %h exp %h", t, p, bv[p], ev, bdata[p], ed);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
