// tb_vlp_array: 4 x 8 array, shared column values, each row's spike at its own cycle
// (one per 8-cycle sweep, like a temporal converter). Every row must deliver beat b of its
// spike at t0+2+b with the value its column b carried at t0+1+b.
`timescale 1ns/1ps
module tb_vlp_array;
  import mugi_pkg::*;
  localparam int H = 4, W = 8, T = 160;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic gemm; logic spike [H], spike_ph [H], spike_s [H]; bf16_t col_val [W];
  logic [1:0] bv [H]; logic [2:0] bidx [H][2]; bf16_t bdata [H][2];
  vlp_array #(.H(H), .W(W)) dut (.*);
  int checks = 0, failures = 0;
  bf16_t hist [T][W]; logic hs [T][H]; logic hp [T];
  int mag [H];
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    gemm = 0;
    for (int r = 0; r < H; r++) begin spike[r] = 0; spike_ph[r] = 0; spike_s[r] = 0; end
    for (int j = 0; j < W; j++) col_val[j] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      if (t % 8 == 0) for (int r = 0; r < H; r++) mag[r] = $urandom % 8;
      for (int r = 0; r < H; r++) begin
        spike[r] = (t % 8 == mag[r]) && t < T - 24; spike_ph[r] = 1'((t / 8) % 2);
        hs[t][r] = spike[r];
      end
      hp[t] = 1'((t / 8) % 2);
      for (int j = 0; j < W; j++) col_val[j] = 16'($urandom);
      hist[t] = col_val;
      #0.5;
      for (int r = 0; r < H; r++)
        for (int p = 0; p < 2; p++) begin
          logic ev; bf16_t ed; int eb;
          ev = 0; ed = 0; eb = 0;
          for (int t0 = t - 9; t0 <= t - 2; t0++)
            if (t0 >= 0 && hs[t0][r] && hp[t0] == p[0]) begin eb = t - t0 - 2; ev = 1; ed = hist[t-1][eb]; end
          checks++;
          if (bv[r][p] != ev || (ev && (bdata[r][p] != ed || int'(bidx[r][p]) != eb))) begin
            failures++; if (failures < 10) $display("FAIL t=%0d r=%0d p=%0d", t, r, p);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
