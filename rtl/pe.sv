// pe: processing element of the VLP array (phase 3, temporal subscription).
//
// The T register holds the row's temporal spike for one cycle and passes it to the next PE,
// so the spike walks along the row one column per cycle. While the spike sits in this PE,
// the AND gate lets the column's broadcast value through: the PE "subscribes" to it. The
// spike's phase bit steers the value to one of the two OR sets of the row, the sign and the
// PE's column index travel with it. Timing: one register stage (T) per PE.
module pe
  import mugi_pkg::*;
#(
  parameter int unsigned IDX = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       t_in,
  input  logic       ph_in,
  input  logic       s_in,
  input  bf16_t      val,
  output logic       t_out,
  output logic       ph_out,
  output logic       s_out,
  output logic [1:0] hit,      // spike present, per OR set
  output bf16_t      sub  [2], // subscribed value, per OR set (zero when idle)
  output logic [2:0] sidx [2]  // column index, per OR set (zero when idle)
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_out <= 1'b0; ph_out <= 1'b0; s_out <= 1'b0;
    end else begin
      t_out <= t_in; ph_out <= ph_in; s_out <= s_in;
    end
  end

  always_comb
    for (int p = 0; p < 2; p++) begin
      hit[p]  = t_out && (ph_out == p[0]);
      sub[p]  = val & {16{hit[p]}};
      sidx[p] = 3'(IDX) & {3{hit[p]}};
    end
endmodule
