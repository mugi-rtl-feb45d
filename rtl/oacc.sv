// oacc: output accumulators of one row.
//
// GEMM (output stationary): the row's beat stream delivers, per mapping (one K step), the
// products w*x_b for the COLS columns b; each is added into FP32 accumulator b. The first
// step of a tile overwrites instead of adding; on the last step the finished sum is rounded
// to BF16 and offered to the output FIFO (fin_*), one offer per beat. Two mappings overlap,
// so two beats (never of the same column) can arrive together: there are two FP32 adders.
// Nonlinear: the post-processing results (rv/rdata, up to two per cycle) are added into one
// running FP32 sum per row, the softmax denominator; clr zeroes it.
// The FP32 width of the accumulators is this design's choice.
module oacc
  import mugi_pkg::*;
#(
  parameter int unsigned W = mugi_pkg::COLS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       gemm,
  input  logic       clr,
  input  logic [1:0] bv,
  input  logic [2:0] bidx  [2],
  input  bf16_t      bdata [2],
  input  logic [1:0] first,      // flags of the mapping on each OR set
  input  logic [1:0] last,
  input  logic [1:0] rv,
  input  bf16_t      rdata [2],
  output logic [1:0] fin_en,
  output logic [2:0] fin_col  [2],
  output bf16_t      fin_data [2],
  output bf16_t      sum
);
  fp32_t acc [W];
  fp32_t sum_q;
  fp32_t a [2], b [2], y [2];

  always_comb begin
    if (gemm) begin
      for (int p = 0; p < 2; p++) begin
        a[p] = first[p] ? 32'd0 : acc[bidx[p]];
        b[p] = bf16_to_fp32(bdata[p]);
      end
    end else begin
      a[0] = sum_q;
      b[0] = bf16_to_fp32(rdata[0]);
      a[1] = '0;
      b[1] = bf16_to_fp32(rdata[1]);
    end
    y[0] = fp32_add(a[0], b[0]);
    if (!gemm) a[1] = rv[0] ? y[0] : sum_q;
    y[1] = fp32_add(a[1], b[1]);
    for (int p = 0; p < 2; p++) begin
      fin_en[p]   = gemm && bv[p] && last[p];
      fin_col[p]  = bidx[p];
      fin_data[p] = fp32_to_bf16(y[p]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q <= '0;
      for (int j = 0; j < int'(W); j++) acc[j] <= '0;
    end else if (gemm) begin
      for (int p = 0; p < 2; p++) if (bv[p]) acc[bidx[p]] <= y[p];
    end else if (clr) begin
      sum_q <= '0;
    end else begin
      if (rv[1])      sum_q <= y[1];
      else if (rv[0]) sum_q <= y[0];
    end
  end

  assign sum = fp32_to_bf16(sum_q);
endmodule
