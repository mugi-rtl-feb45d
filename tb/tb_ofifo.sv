// tb_ofifo: 16-row oFIFO. Fills all 8 columns through both write ports in random order,
// starts a drain of 8 columns and checks 64 consecutive lines (line l = column l/8, rows
// (l%8)*2 .. +1), busy for exactly 64 cycles. Then loads column 0 in one cycle and drains
// one column (8 lines), and finally chains two drains back to back.
`timescale 1ns/1ps
module tb_ofifo;
  import mugi_pkg::*;
  localparam int H = 16, W = 8, OL = H / 8;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic [1:0] wr_en [H]; logic [2:0] wr_col [H][2]; bf16_t wr_data [H][2];
  logic ld; bf16_t ld_data [H]; logic start; logic [3:0] ncols;
  logic busy, out_v; logic [6:0] out_line; bf16_t out_data [OL];
  ofifo #(.H(H), .W(W)) dut (.*);
  int checks = 0, failures = 0;
  bf16_t m [H][W];
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic idle();
    for (int r = 0; r < H; r++) wr_en[r] = 0;
    ld = 0; start = 0;
  endtask
  task automatic drain(int nc, bit chain_next);
    // start is applied in this cycle; lines appear from the next one
    ncols = 4'(nc); start = 1; @(negedge clk); start = 0;
    for (int l = 0; l < nc * 8; l++) begin
      bit ok; ok = busy && out_v && int'(out_line) == l;
      for (int i = 0; i < OL; i++) ok &= out_data[i] == m[(l % 8) * OL + i][l / 8];
      checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL line %0d", l); end
      if (chain_next && l == nc * 8 - 1) begin ncols = 4'd1; start = 1; end
      @(negedge clk); start = 0;
    end
  endtask

  initial begin
    idle(); ncols = 0;
    for (int r = 0; r < H; r++) begin wr_col[r][0] = 0; wr_col[r][1] = 0; wr_data[r][0] = 0; wr_data[r][1] = 0; ld_data[r] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      // fill: each cycle every row writes up to two different columns
      for (int c = 0; c < W; c += 2) begin
        @(negedge clk); idle();
        for (int r = 0; r < H; r++) for (int p = 0; p < 2; p++) begin
          wr_en[r][p] = 1; wr_col[r][p] = 3'(c + (p ^ (r % 2))); wr_data[r][p] = 16'($urandom);
          m[r][c + (p ^ (r % 2))] = wr_data[r][p];
        end
      end
      @(negedge clk); idle();
      checks++; if (busy) failures++;
      drain(8, 0);
      checks++; if (busy) failures++;
      // column 0 load and a one-column drain, then a chained one
      for (int r = 0; r < H; r++) begin ld_data[r] = 16'($urandom); m[r][0] = ld_data[r]; end
      ld = 1; @(negedge clk); ld = 0;
      drain(1, 1);
      for (int l = 0; l < 8; l++) begin
        bit ok; ok = busy && int'(out_line) == l;
        for (int i = 0; i < OL; i++) ok &= out_data[i] == m[(l % 8) * OL + i][0];
        checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL chained line %0d", l); end
        @(negedge clk);
      end
      checks++; if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
