// tb_mugi_sram: writes random lines to a small SRAM, reads them back in random order and
// checks the data and the one-cycle read latency (data hold between reads).
`timescale 1ns/1ps
module tb_mugi_sram;
  localparam int WD = 64, DP = 32;
  logic clk = 0; always #1 clk = ~clk;
  logic we = 0, re = 0; logic [4:0] waddr, raddr; logic [WD-1:0] wdata, rdata;
  mugi_sram #(.WIDTH(WD), .DEPTH(DP)) dut (.*);
  int checks = 0, failures = 0;
  logic [WD-1:0] model [DP];
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < DP; a++) begin
      @(negedge clk); we = 1; waddr = 5'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 100; n++) begin
      int a; a = $urandom % DP;
      @(negedge clk); re = 1; raddr = 5'(a);
      @(negedge clk); re = 0;
      checks++; if (rdata !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
      @(negedge clk);     // held while re is low
      checks++; if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
