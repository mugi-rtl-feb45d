// sw: sliding window over one LUT row (phase 2, value reuse).
//
// A LUT row (one iSRAM line) holds the function values for one sign+mantissa at LUT_MAXE
// consecutive exponents. The sliding window passes COLS consecutive entries, starting at
// entry `off`, to the columns of the array, so column j carries the value for window
// exponent j. The E-proc chooses `off` per mapping; in GEMM mode the offset is 0 and the
// first COLS words of the line are the input tokens. Purely combinational.
module sw
  import mugi_pkg::*;
#(
  parameter int unsigned W = mugi_pkg::COLS,
  parameter int unsigned E = mugi_pkg::LUT_MAXE
) (
  input  bf16_t      row [E],
  input  logic [3:0] off,
  output bf16_t      win [W]
);
  always_comb
    for (int j = 0; j < int'(W); j++)
      win[j] = (32'(off) + 32'(j) < E) ? row[32'(off) + 32'(j)] : BF16_ZERO;
endmodule
