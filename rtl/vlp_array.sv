// vlp_array: the ROWS x COLS VLP array.
//
// Columns share one broadcast value each (from the input accumulators), rows each get their
// own temporal spike from their temporal converter. Every row produces a stream of beats on
// two OR sets; see vlp_row for the timing. The array is the same for GEMM and for nonlinear
// functions: in GEMM the column values are c*x and a row's spike at c = |weight| picks the
// products, in nonlinear mode the column values are LUT entries and the spike picks the
// LUT row of the input's mantissa.
module vlp_array
  import mugi_pkg::*;
#(
  parameter int unsigned H = mugi_pkg::ROWS,
  parameter int unsigned W = mugi_pkg::COLS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       gemm,
  input  logic       spike    [H],
  input  logic       spike_ph [H],
  input  logic       spike_s  [H],
  input  bf16_t      col_val  [W],
  output logic [1:0] bv    [H],
  output logic [2:0] bidx  [H][2],
  output bf16_t      bdata [H][2]
);
  for (genvar r = 0; r < H; r++) begin : g_row
    vlp_row #(.W(W)) u_row (
      .clk, .rst_n, .gemm, .spike(spike[r]), .spike_ph(spike_ph[r]), .spike_s(spike_s[r]),
      .col_val, .bv(bv[r]), .bidx(bidx[r]), .bdata(bdata[r])
    );
  end
endmodule
