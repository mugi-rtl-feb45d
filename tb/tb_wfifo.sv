// tb_wfifo: 16-row operand stage (2 rows per line). Writes the 8 lines of a mapping in
// random order with random gaps; full_next must rise exactly with the 8th write, and start
// must move the stage (including a line written in that same cycle) to the active copy and
// flip active_ph. clr drops a partly filled stage.
`timescale 1ns/1ps
module tb_wfifo;
  import mugi_pkg::*;
  localparam int H = 16, OL = H / 8;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic clr, wr, start, full_next, active_ph; logic [2:0] wr_line;
  row_op_t wr_ops [OL], stage_next [H], active [H];
  wfifo #(.H(H)) dut (.*);
  int checks = 0, failures = 0;
  row_op_t m [H];
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic ph;
    clr = 0; wr = 0; start = 0; wr_line = 0;
    for (int i = 0; i < OL; i++) wr_ops[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (active_ph != 1) failures++;
    ph = 1;
    for (int rep = 0; rep < 30; rep++) begin
      int ord [8];
      if (rep % 10 == 5) begin   // partly filled, then cleared
        wr = 1; wr_line = 0; @(negedge clk); wr = 0; clr = 1; @(negedge clk); clr = 0; ph = 1;
        checks++; if (active_ph != 1) failures++;
      end
      for (int i = 0; i < 8; i++) ord[i] = i;
      ord.shuffle();
      for (int i = 0; i < 8; i++) begin
        while ($urandom % 3 == 0) begin wr = 0; @(negedge clk); end
        wr = 1; wr_line = 3'(ord[i]);
        for (int j = 0; j < OL; j++) begin wr_ops[j] = row_op_t'({$urandom, $urandom}); m[ord[i] * OL + j] = wr_ops[j]; end
        #0.1;
        checks++; if (full_next != (i == 7)) begin failures++; $display("FAIL full_next at write %0d", i); end
        start = (i == 7);
        @(negedge clk); start = 0; wr = 0;
      end
      ph = ~ph;
      checks++;
      if (active_ph != ph) failures++;
      for (int r = 0; r < H; r++) if (active[r] != m[r]) begin failures++; if (failures < 10) $display("FAIL row %0d", r); end
      #0.1; checks++; if (full_next) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
