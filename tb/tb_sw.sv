// tb_sw: a LUT row of 16 distinct words; every offset must pass the 8 words starting there
// (zero beyond the row).
`timescale 1ns/1ps
module tb_sw;
  import mugi_pkg::*;
  bf16_t row [16]; logic [3:0] off; bf16_t win [8];
  sw dut (.*);
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int e = 0; e < 16; e++) row[e] = 16'($urandom);
      off = 4'($urandom); #1;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (win[j] != ((int'(off) + j < 16) ? row[int'(off) + j] : 16'h0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
