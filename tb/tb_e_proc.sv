// tb_e_proc: random exponent sets for 16 rows; checks the window offset (max and min
// anchoring, clamped to the LUT window) and each row's index and special code against a
// reference written from the clamping rules.
`timescale 1ns/1ps
module tb_e_proc;
  import mugi_pkg::*;
  localparam int N = 16;
  row_op_t ops [N]; logic win_max, softmax; logic signed [7:0] lut_e0; logic [4:0] lut_ne;
  logic [3:0] win_off; logic [2:0] idx [N]; spec_e spec [N];
  e_proc #(.N(N)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 400; n++) begin
      int emax, emin, base, off, wl, d, ei;
      spec_e es;
      win_max = 1'($urandom); softmax = 1'($urandom);
      lut_e0 = 8'(-8 + int'($urandom % 6)); lut_ne = 5'(8 + $urandom % 9);
      emax = -1000; emin = 1000;
      for (int r = 0; r < N; r++) begin
        ops[r] = '0;
        ops[r].s = 1'($urandom);
        ops[r].e = 10'(-12 + int'($urandom % 24));
        ops[r].raw = 16'($urandom);
        case ($urandom % 20) 0: ops[r].cls = CLS_ZERO; 1: ops[r].cls = CLS_INF; 2: ops[r].cls = CLS_NAN; default: ops[r].cls = CLS_NORM; endcase
        if (ops[r].cls == CLS_NORM) begin
          if (int'(ops[r].e) > emax) emax = ops[r].e;
          if (int'(ops[r].e) < emin) emin = ops[r].e;
        end
      end
      #1;
      base = win_max ? emax - 7 : emin;
      if (emax == -1000) base = lut_e0;
      off = base - lut_e0; if (off > int'(lut_ne) - 8) off = int'(lut_ne) - 8; if (off < 0) off = 0;
      wl = lut_e0 + off;
      checks++; if (int'(win_off) != off) begin failures++; $display("FAIL off %0d exp %0d", win_off, off); end
      for (int r = 0; r < N; r++) begin
        d = int'(ops[r].e) - wl; ei = 0; es = SP_NONE;
        if (ops[r].cls == CLS_NAN) es = SP_NAN;
        else if (ops[r].cls == CLS_INF) es = (softmax || ops[r].s) ? SP_ZERO : SP_INF;
        else if (ops[r].cls == CLS_ZERO) es = softmax ? SP_NONE : SP_ZERO;
        else if (d < 0) es = softmax ? SP_NONE : SP_ZERO;
        else if (d > 7) begin ei = 7; es = softmax ? SP_NONE : (ops[r].s ? SP_ZERO : SP_PASS); end
        else ei = d;
        checks++;
        if (spec[r] != es || (es == SP_NONE && int'(idx[r]) != ei)) begin
          failures++; if (failures < 10) $display("FAIL row %0d e=%0d idx %0d/%0d spec %0d/%0d", r, ops[r].e, idx[r], ei, spec[r], es);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
