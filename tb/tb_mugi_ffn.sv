// tb_mugi_ffn: a transformer feed-forward slice on one Mugi node at its default size:
// an up-projection GEMM (256 output features x K = 16, INT4 weights with per-row
// dequantisation scales, 8 tokens on the columns) followed by GELU on its results.
//
// The GEMM writes its tile as 64 oSRAM lines, column (token) by column, which is exactly the
// layout of 8 nonlinear mappings of 256 rows; the GELU command reads those lines in place.
// Checks:
//   - every GEMM output against real arithmetic (tolerance for BF16 products and rounding);
//   - every GELU output bit-exactly against a model of the approximation (3-bit mantissa
//     rounding, window at the smallest exponent of each mapping, underflow to zero,
//     overflow pass-through) applied to the node's own GEMM outputs, and inside the window
//     within a few percent of GELU itself;
//   - throughput: mappings start 8 cycles apart in GEMM and 16 apart for the signed GELU,
//     and each command finishes within its sweep time plus a fixed tail.
// GELU uses the tanh form 0.5 x (1 + tanh(sqrt(2/pi) (x + 0.044715 x^3))).
`timescale 1ns/1ps
module tb_mugi_ffn;
  import mugi_pkg::*;
  import tb_util_pkg::*;

  localparam int H  = ROWS;
  localparam int W  = COLS;
  localparam int OL = H / 8;
  localparam int K  = 16;
  localparam int E0 = -6;
  localparam int NE = 12;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cmd_valid = 0; cmd_t cmd; logic busy, done;
  logic h_i_we = 0, h_w_we = 0, h_o_we = 0, h_o_re = 0;
  localparam int IA = $clog2(SRAM_BYTES * 8 / (LUT_MAXE * 16));
  localparam int WA = $clog2(SRAM_BYTES * 8 / (H * 4 / 8));
  localparam int OA = $clog2(SRAM_BYTES * 8 / (H * 2));
  logic [IA-1:0] h_i_addr; logic [255:0] h_i_wdata;
  logic [WA-1:0] h_w_addr; logic [H*4/8-1:0] h_w_wdata;
  logic [OA-1:0] h_o_waddr, h_o_raddr; logic [H*2-1:0] h_o_wdata, o_rdata;
  mugi_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mapping period monitor
  int last_start = -1, per_ok = 0, per_err = 0, n_start = 0;
  always @(posedge clk) if (rst_n && dut.start) begin
    int per;
    per = (!dut.gemm && dut.cfg.nl_signed) ? 16 : 8;
    if (last_start >= 0 && dut.u_ctrl.map_n != 0 && !dut.u_ctrl.stall) begin
      if (cyc - last_start == per) per_ok++; else per_err++;
    end
    last_start = cyc; n_start++;
  end

  task automatic wr_i(input int a, input logic [255:0] d);
    @(negedge clk); h_i_we = 1; h_i_addr = IA'(a); h_i_wdata = d; @(negedge clk); h_i_we = 0;
  endtask
  task automatic wr_w(input int a, input logic [H*4/8-1:0] d);
    @(negedge clk); h_w_we = 1; h_w_addr = WA'(a); h_w_wdata = d; @(negedge clk); h_w_we = 0;
  endtask
  task automatic wr_o(input int a, input logic [H*2-1:0] d);
    @(negedge clk); h_o_we = 1; h_o_waddr = OA'(a); h_o_wdata = d; @(negedge clk); h_o_we = 0;
  endtask
  task automatic rd_o(input int a, output logic [H*2-1:0] d);
    @(negedge clk); h_o_re = 1; h_o_raddr = OA'(a); @(negedge clk); h_o_re = 0; d = o_rdata;
  endtask
  task automatic run(input cmd_t c, output int cycles);
    int t0;
    @(negedge clk); cmd = c; cmd_valid = 1; t0 = cyc; @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic void split(input logic [15:0] x, output int m, output int e);
    m = (int'(x[6:0]) + 8) / 16;
    e = int'(x[14:7]) - 127;
    if (m == 8) begin m = 0; e = e + 1; end
  endfunction
  function automatic real gelu(input real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction

  logic [15:0] lut [16][16];
  logic [15:0] xg [K][W];
  logic [3:0]  wq [K][H];
  logic [15:0] sc [H];
  logic [15:0] y  [W][H];   // GEMM results as read back

  initial begin
    logic [255:0] line;
    logic [H*2-1:0] ol;
    logic [H*4/8-1:0] wl;
    cmd_t c;
    int m, e, emin, off, wlo, idx, ncyc, n_in, n_under, n_over;
    real acc, mag, got, ref_v;

    repeat (4) @(negedge clk);
    rst_n = 1;

    // GELU LUT: row {s,m}, entry k = gelu(+-(1+m/8) 2^(E0+k))
    for (int sm = 0; sm < 16; sm++) begin
      line = '0;
      for (int k = 0; k < 16; k++) begin
        real v;
        v = (1.0 + (sm % 8) / 8.0) * (2.0 ** (E0 + k)) * ((sm >= 8) ? -1.0 : 1.0);
        lut[sm][k] = (k < NE) ? r2bf(gelu(v)) : 16'h0;
        line[16*k +: 16] = lut[sm][k];
      end
      wr_i(sm, line);
    end

    // ---------------- up-projection: y = scale .* (W x), one tile
    for (int k = 0; k < K; k++) begin
      line = '0;
      for (int j = 0; j < W; j++) begin
        xg[k][j] = {1'($urandom), 8'(127 - 3 + int'($urandom % 3)), 7'($urandom)};
        line[16*j +: 16] = xg[k][j];
      end
      wr_i(64 + k, line);
    end
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < H; r++) wq[k][r] = 4'($urandom);
      for (int g = 0; g < 8; g++) begin
        for (int i = 0; i < OL; i++) wl[4*i +: 4] = wq[k][g*OL + i];
        wr_w(k*8 + g, wl);
      end
    end
    for (int r = 0; r < H; r++) sc[r] = r2bf(0.25 + ($urandom % 32) / 32.0);
    for (int g = 0; g < 8; g++) begin
      for (int i = 0; i < OL; i++) ol[16*i +: 16] = sc[g*OL + i];
      wr_o(500 + g, ol);
    end
    c = '0; c.op = OP_LDSCALE; c.src_addr = 500; run(c, ncyc);
    c = '0; c.op = OP_GEMM; c.n = 16'(K); c.tiles = 1; c.w_addr = 0; c.i_addr = 64;
    c.dst_addr = 100; c.scale_en = 1;
    run(c, ncyc);
    // K sweeps of 8 cycles, 19 cycles to the hand-off, 64 drain lines, a few of set-up
    check(ncyc >= 8*K + 64 && ncyc <= 8*K + 8 + 19 + 64 + 8, $sformatf("GEMM took %0d cycles", ncyc));
    for (int l = 0; l < 8*W; l++) begin
      rd_o(100 + l, ol);
      for (int i = 0; i < OL; i++) begin
        int r, j;
        r = (l % 8)*OL + i; j = l / 8;
        acc = 0.0; mag = 0.0;
        for (int k = 0; k < K; k++) begin
          real wv;
          wv = real'(wq[k][r][2:0]) * (wq[k][r][3] ? -1.0 : 1.0);
          acc += wv * bf2r(xg[k][j]); mag += absr(wv * bf2r(xg[k][j]));
        end
        acc = acc * bf2r(sc[r]); mag = mag * bf2r(sc[r]);
        y[j][r] = ol[16*i +: 16];
        got = bf2r(y[j][r]);
        check(absr(got - acc) <= 0.012 * mag + 1e-6, $sformatf("gemm r%0d c%0d got %g exp %g", r, j, got, acc));
      end
    end

    // ---------------- GELU in place of the GEMM tile: 8 mappings (one per token)
    c = '0; c.op = OP_NL; c.n = 16'(W); c.i_addr = 0; c.src_addr = 100; c.dst_addr = 200;
    c.nl_signed = 1; c.win_max = 0; c.lut_e0 = 8'(E0); c.lut_ne = 5'(NE);
    run(c, ncyc);
    check(ncyc >= 16*W && ncyc <= 16*W + 8 + 27 + 8 + 8, $sformatf("GELU took %0d cycles", ncyc));
    n_in = 0; n_under = 0; n_over = 0;
    for (int j = 0; j < W; j++) begin
      emin = 1000;
      for (int r = 0; r < H; r++) if (y[j][r][14:7] != 0) begin split(y[j][r], m, e); if (e < emin) emin = e; end
      off = emin - E0; if (off > NE - 8) off = NE - 8; if (off < 0) off = 0;
      wlo = E0 + off;
      for (int g = 0; g < 8; g++) begin
        rd_o(200 + 8*j + g, ol);
        for (int i = 0; i < OL; i++) begin
          logic [15:0] x, ev;
          int r;
          r = g*OL + i; x = y[j][r];
          if (x[14:7] == 0) ev = 16'h0000;
          else begin
            split(x, m, e);
            idx = e - wlo;
            if (idx < 0) begin ev = 16'h0000; n_under++; end
            else if (idx > 7) begin ev = x[15] ? 16'h0000 : x; n_over++; end
            else begin
              ev = lut[{x[15], 3'(m)}][off + idx]; n_in++;
              ref_v = gelu(bf2r(x));
              check(absr(bf2r(ol[16*i +: 16]) - ref_v) <= 0.1 * absr(ref_v) + 0.07 * absr(bf2r(x)),
                    $sformatf("gelu accuracy x=%g got %g", bf2r(x), bf2r(ol[16*i +: 16])));
            end
          end
          check(ol[16*i +: 16] == ev, $sformatf("gelu token %0d row %0d x=%h got %h exp %h", j, r, x, ol[16*i +: 16], ev));
        end
      end
    end
    $display("gelu: in window %0d, underflow %0d, overflow %0d; periods ok %0d bad %0d; starts %0d",
             n_in, n_under, n_over, per_ok, per_err, n_start);
    check(n_in > 0, "no GELU input inside the window");
    check(per_ok > 0 && per_err == 0, "mapping period");
    check(n_start == K + W, "mapping count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
