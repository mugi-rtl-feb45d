// vlp_row: one row of the VLP array, with its two OR sets and sign conversion.
//
// The row's spike enters PE 0 and walks one column per cycle. Only the PE holding a spike
// passes a value, so a plain OR over the row collects the subscribed value. Two mappings can
// be in flight in a row at once (a new one starts every 8 cycles, a spike needs up to 15 to
// leave the row), so there are two OR sets, selected by the spike's phase bit; each set also
// ORs the column index and the sign of its spike. Sign conversion (SC) XORs the row sign into
// the value's sign bit in GEMM mode (weight sign times input sign); in nonlinear mode the LUT
// values are already signed. The OR results are registered: beat b of a row stream, the
// value of column b, leaves one cycle after the spike reached PE b.
module vlp_row
  import mugi_pkg::*;
#(
  parameter int unsigned W = mugi_pkg::COLS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       gemm,
  input  logic       spike,
  input  logic       spike_ph,
  input  logic       spike_s,
  input  bf16_t      col_val [W],
  output logic [1:0] bv,          // beat valid per OR set
  output logic [2:0] bidx  [2],   // column index of the beat
  output bf16_t      bdata [2]
);
  logic       t  [W+1];
  logic       ph [W+1];
  logic       s  [W+1];
  logic [1:0] hit  [W];
  bf16_t      sub  [W][2];
  logic [2:0] sidx [W][2];

  assign t[0] = spike; assign ph[0] = spike_ph; assign s[0] = spike_s;

  for (genvar j = 0; j < W; j++) begin : g_pe
    pe #(.IDX(j)) u_pe (
      .clk, .rst_n, .t_in(t[j]), .ph_in(ph[j]), .s_in(s[j]), .val(col_val[j]),
      .t_out(t[j+1]), .ph_out(ph[j+1]), .s_out(s[j+1]),
      .hit(hit[j]), .sub(sub[j]), .sidx(sidx[j])
    );
  end

  logic [1:0] or_v, or_s;
  logic [2:0] or_i [2];
  bf16_t      or_d [2];

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      or_v[p] = 1'b0; or_s[p] = 1'b0; or_i[p] = '0; or_d[p] = '0;
      for (int j = 0; j < int'(W); j++) begin
        or_v[p] = or_v[p] | hit[j][p];
        or_s[p] = or_s[p] | (s[j+1] & hit[j][p]);
        or_i[p] = or_i[p] | sidx[j][p];
        or_d[p] = or_d[p] | sub[j][p];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bv <= '0;
      for (int p = 0; p < 2; p++) begin bidx[p] <= '0; bdata[p] <= '0; end
    end else begin
      bv <= or_v;
      for (int p = 0; p < 2; p++) begin
        bidx[p]  <= or_i[p];
        bdata[p] <= {or_d[p][15] ^ (gemm & or_s[p]), or_d[p][14:0]};   // SC
      end
    end
  end
endmodule
