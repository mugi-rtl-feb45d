// tb_mugi_top: end-to-end test of one Mugi node at its default size.
//
// Runs, on the same node and LUT-loaded iSRAM:
//   1. softmax exp over several mappings (window at the largest exponent, row sums kept),
//      with zero, -INF and NaN inputs, an input below the window and one above the LUT;
//   2. the softmax normalisation: reciprocals of the sums into the vector array, then a
//      vector pass over all exp results;
//   3. SiLU with inputs of both signs (16-cycle sweep, window at the smallest exponent),
//      with underflow, overflow pass-through and special values;
//   4. a BF16 x INT4 GEMM of two tiles with dequantisation scales, short enough in K that
//      the second tile has to wait for the first tile's drain.
// Expected values come from real arithmetic on the test's own LUT and inputs. It checks the
// mapping period (8 cycles, 16 for signed functions, 8 per GEMM step) and counts how often
// each mechanism happened; a mechanism that never happened is a failure.
`timescale 1ns/1ps
module tb_mugi_top;
  import mugi_pkg::*;
  import tb_util_pkg::*;

  localparam int H  = ROWS;
  localparam int W  = COLS;
  localparam int OL = H / 8;
  localparam int NMAP = 4;          // softmax mappings
  localparam int K    = 3;          // GEMM steps per tile
  localparam int NT   = 2;          // GEMM tiles
  localparam int E0   = -6;         // LUT window [-6, 5] (12 exponents)
  localparam int NE   = 12;

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

  // ------------------------------------------------------------ mechanism counters
  int n_stall = 0, n_dual = 0, n_under = 0, n_over = 0, n_spec = 0, n_pass = 0;
  int n_winmove = 0, n_signed = 0, n_gemm = 0, n_nl = 0;
  int last_start = -1, period_err = 0, period_ok = 0;
  logic [3:0] last_win = 4'hF;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.stall) n_stall++;
    for (int r = 0; r < H; r++) if (dut.bv[r] == 2'b11) begin n_dual++; break; end
    if (dut.start) begin
      if (dut.gemm) n_gemm++; else n_nl++;
      if (!dut.gemm && dut.cfg.nl_signed) n_signed++;
      if (!dut.gemm) begin
        if (last_win != 4'hF && dut.win_off != last_win) n_winmove++;
        last_win = dut.win_off;
        for (int r = 0; r < H; r++) begin
          if (dut.ep_spec[r] == SP_PASS) n_pass++;
          if (dut.ep_spec[r] == SP_INF || dut.ep_spec[r] == SP_NAN) n_spec++;
          if (dut.stage_next[r].cls == CLS_NORM) begin
            if (dut.stage_next[r].e < E0 + int'(dut.win_off)) n_under++;
            if (dut.stage_next[r].e > E0 + int'(dut.win_off) + 7) n_over++;
          end
        end
      end
      // back-to-back mappings of one command must be one period apart
      if (last_start >= 0 && !dut.u_ctrl.stall && dut.u_ctrl.map_n != 0) begin
        int per;
        per = (!dut.gemm && dut.cfg.nl_signed) ? 16 : 8;
        if (cyc - last_start == per) period_ok++;
        else if (cyc - last_start < per) period_err++;
      end
      last_start = cyc;
    end
  end

  // ------------------------------------------------------------ host helpers
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
  task automatic run(input cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ------------------------------------------------------------ reference pieces
  // M-proc reference: 3-bit mantissa rounded half up, carry into the exponent
  function automatic void split(input logic [15:0] x, output int m, output int e);
    int m7;
    m7 = int'(x[6:0]);
    m  = (m7 + 8) / 16;
    e  = int'(x[14:7]) - 127;
    if (m == 8) begin m = 0; e = e + 1; end
  endfunction

  logic [15:0] lut_sm [8][16];    // exp(-(1+m/8) 2^e)
  logic [15:0] lut_si [16][16];   // silu(+-(1+m/8) 2^e), row {s,m}
  logic [15:0] xin  [NMAP][H];
  logic [15:0] xres [NMAP][H];
  logic [15:0] sil  [H];

  function automatic real silu(input real x);
    return x / (1.0 + $exp(-x));
  endfunction

  logic [15:0] xg [K][W];
  logic [3:0]  wq [NT][K][H];
  logic [15:0] sc [H];

  initial begin
    logic [255:0] line;
    logic [H*2-1:0] ol;
    logic [H*4/8-1:0] wl;
    cmd_t c;
    int m, e, emax, off, wlo, idx, emin;
    real ref_v, got, tol, sum_r [H];

    repeat (4) @(negedge clk);
    rst_n = 1;

    // ---------------- LUTs (computed offline, here by the test)
    for (m = 0; m < 8; m++) begin
      for (int k = 0; k < 16; k++) begin
        lut_sm[m][k] = (k < NE) ? r2bf($exp(-(1.0 + m / 8.0) * (2.0 ** (E0 + k)))) : 16'h0;
        line[16*k +: 16] = lut_sm[m][k];
      end
      wr_i(m, line);
    end
    for (int sm = 0; sm < 16; sm++) begin
      for (int k = 0; k < 16; k++) begin
        real v;
        v = (1.0 + (sm % 8) / 8.0) * (2.0 ** (E0 + k));
        if (sm >= 8) v = -v;
        lut_si[sm][k] = (k < NE) ? r2bf(silu(v)) : 16'h0;
        line[16*k +: 16] = lut_si[sm][k];
      end
      wr_i(16 + sm, line);
    end

    // ---------------- 1. softmax exp: inputs x <= 0 with exponents in [-5, 4]
    for (int k = 0; k < NMAP; k++) begin
      for (int r = 0; r < H; r++) begin
        int ee;
        ee = -5 + int'($urandom % 10);
        xin[k][r] = {1'b1, 8'(127 + ee), 7'($urandom)};
      end
      xin[k][3] = {1'b1, 8'(127 + 4), 7'd5};                 // sets the window to [-3, 4]
      if (k == 1) begin xin[k][5] = 16'h0000; xin[k][6] = 16'hFF80; xin[k][7] = 16'hFFC1; end
      if (k == 2) xin[k][9] = {1'b1, 8'(127 + 6), 7'd0};      // above the LUT: window slides
      for (int g = 0; g < 8; g++) begin
        for (int i = 0; i < OL; i++) ol[16*i +: 16] = xin[k][g*OL + i];
        wr_o(8*k + g, ol);
      end
    end
    c = '0; c.op = OP_NL; c.n = 16'(NMAP); c.i_addr = 0; c.src_addr = 0; c.dst_addr = 64;
    c.sum_addr = 128; c.nl_softmax = 1; c.win_max = 1; c.wr_sum = 1; c.lut_e0 = 8'(E0);
    c.lut_ne = 5'(NE);
    run(c);
    for (int r = 0; r < H; r++) sum_r[r] = 0.0;
    for (int k = 0; k < NMAP; k++) begin
      emax = -1000;
      for (int r = 0; r < H; r++) if (xin[k][r][14:7] != 0 && xin[k][r][14:7] != 8'hFF) begin
        split(xin[k][r], m, e); if (e > emax) emax = e;
      end
      off = emax - 7 - E0; if (off > NE - 8) off = NE - 8; if (off < 0) off = 0;
      wlo = E0 + off;
      for (int g = 0; g < 8; g++) begin
        rd_o(64 + 8*k + g, ol);
        for (int i = 0; i < OL; i++) begin
          logic [15:0] x, exp_v;
          int r;
          r = g*OL + i; x = xin[k][r];
          if (x[14:7] == 8'hFF) exp_v = (x[6:0] != 0) ? 16'h7FC0 : 16'h0000;
          else begin
            split(x, m, e);
            if (x[14:7] == 0) begin m = 0; idx = 0; end
            else begin idx = e - wlo; if (idx < 0) idx = 0; if (idx > 7) idx = 7; end
            exp_v = lut_sm[m][off + idx];
          end
          xres[k][r] = ol[16*i +: 16];
          check(ol[16*i +: 16] == exp_v, $sformatf("exp map %0d row %0d x=%h got %h exp %h", k, r, x, ol[16*i +: 16], exp_v));
          if (exp_v != 16'h7FC0) sum_r[r] += bf2r(exp_v);
        end
      end
    end
    // row sums (NaN rows skipped)
    for (int g = 0; g < 8; g++) begin
      rd_o(128 + g, ol);
      for (int i = 0; i < OL; i++) begin
        int r; r = g*OL + i;
        if (!(r == 7)) begin
          got = bf2r(ol[16*i +: 16]);
          check(absr(got - sum_r[r]) <= 0.01 * sum_r[r] + 1e-6, $sformatf("sum row %0d got %f exp %f", r, got, sum_r[r]));
        end
      end
    end

    // ---------------- 2. normalisation: 1/sum into Vec, then scale every exp result
    c = '0; c.op = OP_LDSCALE; c.src_addr = 128; c.recip = 1; run(c);
    c = '0; c.op = OP_VEC; c.n = 16'(8 * NMAP); c.src_addr = 64; c.dst_addr = 192; run(c);
    for (int k = 0; k < NMAP; k++)
      for (int g = 0; g < 8; g++) begin
        rd_o(192 + 8*k + g, ol);
        for (int i = 0; i < OL; i++) begin
          int r; r = g*OL + i;
          if (r != 7) begin
            ref_v = bf2r(xres[k][r]) / sum_r[r];
            got = bf2r(ol[16*i +: 16]);
            check(absr(got - ref_v) <= 0.02 * ref_v + 1e-9, $sformatf("softmax %0d,%0d got %g exp %g", k, r, got, ref_v));
          end
        end
      end

    // ---------------- 3. SiLU, signed inputs, window at the smallest exponent
    for (int r = 0; r < H; r++) begin
      int ee;
      ee = -3 + int'($urandom % 8);                            // [-3, 4]
      sil[r] = {1'($urandom), 8'(127 + ee), 7'($urandom)};
    end
    sil[0] = {1'b0, 8'(127 - 3), 7'd0};                        // window [-3, 4]
    sil[1] = {1'b0, 8'(127 + 9), 7'd3};                        // overflow, positive: pass
    sil[2] = {1'b1, 8'(127 + 9), 7'd3};                        // overflow, negative: zero
    sil[3] = {1'b0, 8'(127 - 5), 7'd3};                        // underflow: zero
    sil[4] = 16'h7F80; sil[5] = 16'hFF80; sil[6] = 16'h7FC0; sil[8] = 16'h0000;
    for (int g = 0; g < 8; g++) begin
      for (int i = 0; i < OL; i++) ol[16*i +: 16] = sil[g*OL + i];
      wr_o(256 + g, ol);
    end
    c = '0; c.op = OP_NL; c.n = 1; c.i_addr = 16; c.src_addr = 256; c.dst_addr = 264;
    c.nl_signed = 1; c.win_max = 0; c.lut_e0 = 8'(E0); c.lut_ne = 5'(NE);
    run(c);
    emin = 1000;
    for (int r = 0; r < H; r++) if (sil[r][14:7] != 0 && sil[r][14:7] != 8'hFF) begin
      split(sil[r], m, e); if (e < emin) emin = e;
    end
    off = emin - E0; if (off > NE - 8) off = NE - 8; if (off < 0) off = 0;
    wlo = E0 + off;
    for (int g = 0; g < 8; g++) begin
      rd_o(264 + g, ol);
      for (int i = 0; i < OL; i++) begin
        logic [15:0] x, exp_v;
        int r;
        r = g*OL + i; x = sil[r];
        if (x[14:7] == 8'hFF) exp_v = (x[6:0] != 0) ? 16'h7FC0 : (x[15] ? 16'h0000 : 16'h7F80);
        else if (x[14:7] == 0) exp_v = 16'h0000;
        else begin
          split(x, m, e);
          idx = e - wlo;
          if (idx < 0) exp_v = 16'h0000;
          else if (idx > 7) exp_v = x[15] ? 16'h0000 : x;
          else exp_v = lut_si[{x[15], 3'(m)}][off + idx];
        end
        check(ol[16*i +: 16] == exp_v, $sformatf("silu row %0d x=%h got %h exp %h", r, x, ol[16*i +: 16], exp_v));
        if (exp_v != 16'h7FC0 && x[14:7] != 8'hFF && x[14:7] != 0) begin
          // and the approximation is close to SiLU itself inside the window
          split(x, m, e);
          if (e - wlo >= 0 && e - wlo <= 7) begin
            ref_v = silu(bf2r(x));
            check(absr(bf2r(ol[16*i +: 16]) - ref_v) <= 0.1 * absr(ref_v) + 0.07 * absr(bf2r(x)),
                  $sformatf("silu accuracy x=%g got %g", bf2r(x), bf2r(ol[16*i +: 16])));
          end
        end
      end
    end

    // ---------------- 4. GEMM: NT tiles x K steps, INT4 weights on rows, 8 tokens on columns
    for (int k = 0; k < K; k++) begin
      line = '0;
      for (int j = 0; j < W; j++) begin
        xg[k][j] = {1'($urandom), 8'(127 - 2 + int'($urandom % 4)), 7'($urandom)};
        line[16*j +: 16] = xg[k][j];
      end
      wr_i(40 + k, line);
    end
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < H; r++) wq[t][k][r] = 4'($urandom);
        for (int g = 0; g < 8; g++) begin
          for (int i = 0; i < OL; i++) wl[4*i +: 4] = wq[t][k][g*OL + i];
          wr_w((t*K + k)*8 + g, wl);
        end
      end
    for (int r = 0; r < H; r++) sc[r] = r2bf(0.5 + ($urandom % 64) / 32.0);
    for (int g = 0; g < 8; g++) begin
      for (int i = 0; i < OL; i++) ol[16*i +: 16] = sc[g*OL + i];
      wr_o(300 + g, ol);
    end
    c = '0; c.op = OP_LDSCALE; c.src_addr = 300; c.recip = 0; run(c);
    c = '0; c.op = OP_GEMM; c.n = 16'(K); c.tiles = 8'(NT); c.w_addr = 0; c.i_addr = 40;
    c.dst_addr = 320; c.scale_en = 1;
    run(c);
    for (int t = 0; t < NT; t++)
      for (int l = 0; l < 8*W; l++) begin
        rd_o(320 + 64*t + l, ol);
        for (int i = 0; i < OL; i++) begin
          int r, j;
          real acc, mag;
          r = (l % 8)*OL + i; j = l / 8;
          acc = 0.0; mag = 0.0;
          for (int k = 0; k < K; k++) begin
            real wv;
            wv = real'(wq[t][k][r][2:0]) * (wq[t][k][r][3] ? -1.0 : 1.0);
            acc += wv * bf2r(xg[k][j]);
            mag += absr(wv * bf2r(xg[k][j]));
          end
          acc = acc * bf2r(sc[r]); mag = mag * bf2r(sc[r]);
          got = bf2r(ol[16*i +: 16]);
          check(absr(got - acc) <= 0.012 * mag + 1e-6,
                $sformatf("gemm t%0d r%0d c%0d got %g exp %g", t, r, j, got, acc));
        end
      end

    // ---------------- mechanisms and rates
    $display("mechanisms: stall=%0d dual_or=%0d under=%0d over=%0d special=%0d pass=%0d winmove=%0d signed=%0d gemm=%0d nl=%0d period_ok=%0d period_err=%0d",
             n_stall, n_dual, n_under, n_over, n_spec, n_pass, n_winmove, n_signed, n_gemm, n_nl, period_ok, period_err);
    check(n_stall > 0, "no stall");
    check(n_dual > 0, "two OR sets never busy together");
    check(n_under > 0, "no underflow");
    check(n_over > 0, "no overflow");
    check(n_spec > 0, "no special value");
    check(n_pass > 0, "no pass-through");
    check(n_winmove > 0, "window never moved");
    check(n_signed > 0, "no signed sweep");
    check(n_gemm == NT*K, "GEMM mapping count");
    check(n_nl == NMAP + 1, "nonlinear mapping count");
    check(period_ok > 0 && period_err == 0, "mapping period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
