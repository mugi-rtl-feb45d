// pp: post processing of one row (phase 4, exponent temporal subscription).
//
// For each of the two mappings in flight (phases) it holds the row's exponent index and
// special-value code, loaded shortly after the mapping starts. It watches the row's beat
// stream of that phase: beat b carries the LUT entry for window exponent b, and the beat
// whose index equals the exponent index is captured (the M-sel of the paper turns the index
// into this selection). If the row has a special value, the multiplexer gives Zero, INF, NaN
// or the input itself instead, at load time. So the result appears mantissa + exponent
// cycles after the mapping's sweep started. Each capture raises rv for one cycle with the
// value on rdata, for the row-sum accumulator; res holds the last result of each phase.
module pp
  import mugi_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ld,
  input  logic       ld_ph,
  input  logic [2:0] ld_idx,
  input  spec_e      ld_spec,
  input  bf16_t      ld_raw,
  input  logic [1:0] bv,
  input  logic [2:0] bidx  [2],
  input  bf16_t      bdata [2],
  output bf16_t      res   [2],
  output logic [1:0] rv,
  output bf16_t      rdata [2]
);
  logic [2:0] idx_q [2];
  logic [1:0] wait_q;

  function automatic bf16_t special(input spec_e sp, input bf16_t raw);
    case (sp)
      SP_INF:  return BF16_INF;
      SP_NAN:  return BF16_NAN;
      SP_PASS: return raw;
      default: return BF16_ZERO;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q <= '0; rv <= '0;
      for (int p = 0; p < 2; p++) begin idx_q[p] <= '0; res[p] <= '0; rdata[p] <= '0; end
    end else begin
      rv <= '0;
      for (int p = 0; p < 2; p++) begin
        if (ld && ld_ph == p[0]) begin
          idx_q[p] <= ld_idx;
          if (ld_spec != SP_NONE) begin
            res[p] <= special(ld_spec, ld_raw); rdata[p] <= special(ld_spec, ld_raw);
            rv[p] <= 1'b1; wait_q[p] <= 1'b0;
          end else wait_q[p] <= 1'b1;
        end else if (wait_q[p] && bv[p] && bidx[p] == idx_q[p]) begin
          res[p] <= bdata[p]; rdata[p] <= bdata[p]; rv[p] <= 1'b1; wait_q[p] <= 1'b0;
        end
      end
    end
  end
endmodule
