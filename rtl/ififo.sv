// ififo: column stagger of the broadcast values (phase 2).
//
// The temporal spike of a row moves one column per cycle, so the value broadcast down
// column j must be late by j cycles. Column j passes through j registers; column 0 is
// combinational. A `first` flag travels with each value to mark the first step of a mapping.
// Latency: j cycles for column j; no reset is needed for the data, the flags are cleared.
module ififo
  import mugi_pkg::*;
#(
  parameter int unsigned W = mugi_pkg::COLS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_v,
  input  logic  in_first,
  input  bf16_t in_val [W],
  output logic  out_v     [W],
  output logic  out_first [W],
  output bf16_t out_val   [W]
);
  // stage k of column j holds the value k+1 cycles old; only stages k < j are used
  logic  sv [W][W];
  logic  sf [W][W];
  bf16_t sd [W][W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(W); j++)
        for (int k = 0; k < int'(W); k++) begin sv[j][k] <= 1'b0; sf[j][k] <= 1'b0; sd[j][k] <= '0; end
    end else begin
      for (int j = 1; j < int'(W); j++) begin
        sv[j][0] <= in_v; sf[j][0] <= in_first; sd[j][0] <= in_val[j];
        for (int k = 1; k < j; k++) begin
          sv[j][k] <= sv[j][k-1]; sf[j][k] <= sf[j][k-1]; sd[j][k] <= sd[j][k-1];
        end
      end
    end
  end

  always_comb begin
    out_v[0] = in_v; out_first[0] = in_first; out_val[0] = in_val[0];
    for (int j = 1; j < int'(W); j++) begin
      out_v[j] = sv[j][j-1]; out_first[j] = sf[j][j-1]; out_val[j] = sd[j][j-1];
    end
  end
endmodule
