// vec: vector multiplication array.
//
// OL = H/8 BF16 multipliers that scale one oSRAM line per cycle by a per-row factor: the
// dequantisation scale of INT4 weights/KV cache after GEMM, or the reciprocal of a softmax
// row sum. Row group g (the line's index modulo 8) selects which OL factors apply. The H
// factors are loaded from 8 oSRAM lines (ld_*), optionally as reciprocals, so a softmax
// denominator becomes a multiplier in one pass. With scale off the line passes unchanged.
// Timing: one cycle, registered output with the line's destination address.
// The reciprocal unit (integer divide of the 8-bit significand) is this design's choice;
// the paper only says the array multiplies by the reciprocal of the sum.
module vec
  import mugi_pkg::*;
#(
  parameter int unsigned H  = mugi_pkg::ROWS,
  localparam int unsigned OL = H / 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ld,
  input  logic [2:0]  ld_grp,
  input  logic        ld_recip,
  input  bf16_t       ld_data [OL],
  input  logic        in_v,
  input  logic        scale_en,
  input  logic [2:0]  in_grp,
  input  logic [15:0] in_addr,
  input  bf16_t       in_data [OL],
  output logic        out_v,
  output logic [15:0] out_addr,
  output bf16_t       out_data [OL]
);
  bf16_t scale_q [H];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_v <= 1'b0; out_addr <= '0;
      for (int i = 0; i < int'(OL); i++) out_data[i] <= '0;
      for (int r = 0; r < int'(H); r++) scale_q[r] <= 16'h3F80;   // 1.0
    end else begin
      if (ld)
        for (int i = 0; i < int'(OL); i++)
          scale_q[32'(ld_grp) * OL + 32'(i)] <= ld_recip ? bf16_recip(ld_data[i]) : ld_data[i];
      out_v    <= in_v;
      out_addr <= in_addr;
      for (int i = 0; i < int'(OL); i++)
        out_data[i] <= scale_en ? bf16_mul(in_data[i], scale_q[32'(in_grp) * OL + 32'(i)])
                                : in_data[i];
    end
  end
endmodule
