// mugi_sram: one on-chip SRAM of the Mugi node (iSRAM, wSRAM or oSRAM).
//
// Each of the three SRAMs holds 64 KB. The iSRAM holds the precomputed nonlinear lookup table
// (one line per sign+mantissa, one BF16 entry per exponent) or, for GEMM, lines of BF16 input
// tokens. The wSRAM holds INT4 weights, ROWS/8 per line, so the array's rows load in 8 lines.
// The oSRAM holds results and the inputs of nonlinear operations, ROWS/8 BF16 words per line.
// Double buffering is by address halves: the host fills one half while the array works on the
// other; the two ports make that possible. The line widths follow the paper's rule that a
// full row set loads in 8 cycles; the iSRAM width and the port arrangement are this design's.
// Interface: one write port and one read port, both synchronous; read data appear one cycle
// after re/raddr and hold until the next read.
module mugi_sram #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = mugi_pkg::SRAM_BYTES * 8 / WIDTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
