// iacc: input accumulator at the top of one array column.
//
// GEMM mode: at the first step of a mapping the column's BF16 input x is latched and the
// output is 0; at every further step x is added once more, so at step c the column carries
// c*x, the product every row whose weight magnitude is c subscribes to (value reuse by
// repeated addition, no multiplier). The running sum is kept exactly as an integer multiple
// of x's significand and rounded once to BF16.
// Nonlinear mode: the LUT entry on the input is registered and passed on unchanged.
// Timing: the output is registered, one cycle after the input step.
module iacc
  import mugi_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  gemm,
  input  logic  in_v,
  input  logic  in_first,
  input  bf16_t in_val,
  output bf16_t out_val
);
  bf16_t      x_q;
  logic [2:0] c_q;
  bf16_t      pass_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; c_q <= '0; pass_q <= '0;
    end else if (in_v) begin
      pass_q <= in_val;
      if (in_first) begin
        x_q <= in_val; c_q <= 3'd0;
      end else c_q <= c_q + 3'd1;
    end
  end

  assign out_val = gemm ? bf16_mul_small(x_q, c_q) : pass_q;
endmodule
