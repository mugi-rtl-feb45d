// wfifo: row operand staging (the wFIFOs in front of the temporal converters).
//
// While a mapping runs, the operands of the next one arrive, OL = H/8 rows per cycle over
// 8 cycles (weights from the wSRAM, or M-proc outputs of oSRAM lines). They collect in the
// stage; `start` moves the stage to the active set that the temporal converters read, and
// empties the stage. stage_next/full_next show the stage including this cycle's write, so a
// mapping can start in the cycle its last line arrives and mappings follow every 8 cycles.
// The active set also remembers the mapping's phase (alternating 0/1).
module wfifo
  import mugi_pkg::*;
#(
  parameter int unsigned H  = mugi_pkg::ROWS,
  localparam int unsigned OL = H / 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clr,        // drop a partly filled stage, phase back to 0
  input  logic       wr,
  input  logic [2:0] wr_line,
  input  row_op_t    wr_ops [OL],
  input  logic       start,
  output row_op_t    stage_next [H],
  output logic       full_next,
  output row_op_t    active [H],
  output logic       active_ph
);
  row_op_t    stage_q [H];
  logic [3:0] cnt_q, cnt_next;

  always_comb begin
    stage_next = stage_q;
    if (wr)
      for (int i = 0; i < int'(OL); i++) stage_next[32'(wr_line) * OL + 32'(i)] = wr_ops[i];
    cnt_next  = cnt_q + (wr ? 4'd1 : 4'd0);
    full_next = (cnt_next == 4'd8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0; active_ph <= 1'b1;
      for (int r = 0; r < int'(H); r++) begin stage_q[r] <= '0; active[r] <= '0; end
    end else if (clr) begin
      cnt_q <= '0; active_ph <= 1'b1;
    end else begin
      stage_q <= stage_next;
      cnt_q   <= cnt_next;
      if (start) begin
        active    <= stage_next;
        active_ph <= ~active_ph;
        cnt_q     <= '0;
      end
    end
  end
endmodule
