// e_proc: exponent processing for one nonlinear mapping (phase 1).
//
// Looks at the exponents of all ROWS inputs of a mapping, finds the largest (win_max=1) or
// smallest normal exponent and places the 8-wide sliding window there: [max-7, max] or
// [min, min+7]. The window is then shifted so that it lies inside the exponents the LUT row
// stores (lut_e0 .. lut_e0+lut_ne-1); win_off is its first LUT entry, for the SW block.
// Each row's exponent becomes an index 0..7 into the window. Outside the window:
//   underflow: softmax uses index 0, SiLU/GELU output zero;
//   overflow : softmax uses index 7 (the window's last LUT entry), SiLU/GELU pass a positive
//              input through and give zero for a negative one.
// Zero inputs follow the underflow rule, infinities and NaN become special outputs. The
// window rule follows the paper; the exact clamping policy is this design's reading of it.
// Purely combinational.
module e_proc
  import mugi_pkg::*;
#(
  parameter int unsigned N = mugi_pkg::ROWS
) (
  input  row_op_t          ops [N],
  input  logic             win_max,
  input  logic             softmax,
  input  logic signed [7:0] lut_e0,
  input  logic [4:0]       lut_ne,
  output logic [3:0]       win_off,
  output logic [2:0]       idx  [N],
  output spec_e            spec [N]
);
  logic signed [9:0] emax, emin, base, off, wl, d;
  logic              any;

  always_comb begin
    emax = -10'sd512; emin = 10'sd511; any = 1'b0;
    for (int r = 0; r < int'(N); r++) begin
      if (ops[r].cls == CLS_NORM) begin
        any = 1'b1;
        if (ops[r].e > emax) emax = ops[r].e;
        if (ops[r].e < emin) emin = ops[r].e;
      end
    end
    base = win_max ? emax - 10'sd7 : emin;
    if (!any) base = 10'(lut_e0);
    off = base - 10'(lut_e0);
    if (off > 10'($signed({1'b0, lut_ne})) - 10'sd8) off = 10'($signed({1'b0, lut_ne})) - 10'sd8;
    if (off < 10'sd0) off = 10'sd0;
    win_off = off[3:0];
    wl = 10'(lut_e0) + off;
    for (int r = 0; r < int'(N); r++) begin
      d       = ops[r].e - wl;
      idx[r]  = 3'd0;
      spec[r] = SP_NONE;
      case (ops[r].cls)
        CLS_NAN:  spec[r] = SP_NAN;
        CLS_INF:  spec[r] = (softmax || ops[r].s) ? SP_ZERO : SP_INF;
        CLS_ZERO: if (!softmax) spec[r] = SP_ZERO;
        default: begin
          if (d < 10'sd0) begin
            if (!softmax) spec[r] = SP_ZERO;
          end else if (d > 10'sd7) begin
            idx[r] = 3'd7;
            if (!softmax) spec[r] = ops[r].s ? SP_ZERO : SP_PASS;
          end else idx[r] = d[2:0];
        end
      endcase
    end
  end
endmodule
