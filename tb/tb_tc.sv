// tb_tc: sweeps the counter for random operands; exactly one spike per sweep, at the count
// equal to the magnitude (8-cycle sweep) or to {sign, magnitude} (16-cycle sweep).
`timescale 1ns/1ps
module tb_tc;
  import mugi_pkg::*;
  logic en, sgn_mode, phase, spike, spike_ph, spike_s; logic [3:0] cnt; row_op_t op;
  tc dut (.*);
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 200; n++) begin
      int at, spikes;
      op = '0; op.s = 1'($urandom); op.m = 3'($urandom); sgn_mode = 1'($urandom); phase = 1'($urandom);
      en = 1; spikes = 0; at = -1;
      for (int c = 0; c < (sgn_mode ? 16 : 8); c++) begin
        cnt = 4'(c); #1;
        if (spike) begin spikes++; at = c; end
        if (spike && (spike_ph != phase || spike_s != op.s)) failures++;
      end
      checks++;
      if (spikes != 1 || at != (sgn_mode ? int'({op.s, op.m}) : int'(op.m))) begin
        failures++; $display("FAIL spikes %0d at %0d", spikes, at);
      end
      en = 0; cnt = 4'(op.m); #1; checks++; if (spike) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
