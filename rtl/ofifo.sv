// ofifo: output buffer between the array and the oSRAM.
//
// Holds one finished result set of H x W BF16 values (H rows, W columns) and drains it to
// the vector array and the oSRAM one line of OL = H/8 values per cycle. Line l carries
// column l/8, rows (l%8)*OL .. (l%8)*OL+OL-1, so a nonlinear result set (column 0 only) is
// 8 lines in row order, and a GEMM tile is 8*W lines, column by column.
// Filling: GEMM accumulators write single entries (two ports per row) as their final beats
// arrive; nonlinear results and row sums are loaded into column 0 of all rows at once.
// Draining: `start` with the number of columns begins a drain on the next cycle; `busy`
// stays high until the last line has left. A new start is accepted in the cycle of the last
// line, so result sets can follow each other without a gap. The depth of one set is this
// design's choice; the paper only names the block.
module ofifo
  import mugi_pkg::*;
#(
  parameter int unsigned H  = mugi_pkg::ROWS,
  parameter int unsigned W  = mugi_pkg::COLS,
  localparam int unsigned OL = H / 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  wr_en   [H],
  input  logic [2:0]  wr_col  [H][2],
  input  bf16_t       wr_data [H][2],
  input  logic        ld,
  input  bf16_t       ld_data [H],
  input  logic        start,
  input  logic [3:0]  ncols,
  output logic        busy,
  output logic        out_v,
  output logic [6:0]  out_line,
  output bf16_t       out_data [OL]
);
  bf16_t      buf_q [H][W];
  logic [6:0] line_q, nlines_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; line_q <= '0; nlines_q <= '0;
    end else begin
      if (busy) begin
        if (line_q == nlines_q - 7'd1) begin
          busy <= start; line_q <= '0; nlines_q <= 7'(ncols) * 7'd8;
        end else line_q <= line_q + 7'd1;
      end else if (start) begin
        busy <= 1'b1; line_q <= '0; nlines_q <= 7'(ncols) * 7'd8;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(H); r++) begin
      if (ld) buf_q[r][0] <= ld_data[r];
      for (int p = 0; p < 2; p++) if (wr_en[r][p]) buf_q[r][wr_col[r][p]] <= wr_data[r][p];
    end
  end

  always_comb begin
    out_v    = busy;
    out_line = line_q;
    for (int i = 0; i < int'(OL); i++)
      out_data[i] = buf_q[32'(line_q[2:0]) * OL + 32'(i)][line_q[5:3]];
  end
endmodule
