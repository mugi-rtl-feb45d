// tc: temporal converter of one array row (phase 3).
//
// An equality comparator between the shared counter and the row's magnitude: when they are
// equal the row emits a one-cycle spike into its first PE. For GEMM and softmax the 3-bit
// magnitude is compared (8-cycle sweep); for SiLU/GELU, whose LUT has a row per sign and
// mantissa, the sign is the fourth bit (16-cycle sweep). The spike carries the phase of its
// mapping (two mappings overlap in a row) and the row's sign for sign conversion.
// Purely combinational.
module tc
  import mugi_pkg::*;
(
  input  logic       en,       // a mapping is being swept
  input  logic [3:0] cnt,
  input  logic       sgn_mode, // compare {s, m} instead of m
  input  logic       phase,
  input  row_op_t    op,
  output logic       spike,
  output logic       spike_ph,
  output logic       spike_s
);
  always_comb begin
    if (sgn_mode) spike = en && (cnt == {op.s, op.m});
    else          spike = en && (cnt[2:0] == op.m) && (cnt[3] == 1'b0);
    spike_ph = phase;
    spike_s  = op.s;
  end
endmodule
