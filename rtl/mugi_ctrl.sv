// mugi_ctrl: controller of a Mugi node, including the shared counter (CNT).
//
// It runs one host command at a time (cmd_valid while idle; busy until a one-cycle done):
//   OP_GEMM    tiles x n mappings. A mapping is one K step: ROWS INT4 weights (8 wSRAM
//              lines) on the rows, COLS BF16 inputs (one iSRAM line) on the columns, an
//              8-cycle sweep. The last step of a tile hands the accumulators to the oFIFO,
//              which drains 8*COLS lines to dst_addr + 8*COLS*tile through the vector array.
//   OP_NL      n mappings of ROWS nonlinear inputs (8 oSRAM lines each, from src_addr).
//              The sweep reads one LUT row per cycle (8, or 16 for signed functions) from
//              i_addr. Each mapping's ROWS results drain as 8 lines to dst_addr + 8*k; with
//              wr_sum the row sums follow as 8 lines at sum_addr.
//   OP_LDSCALE 8 oSRAM lines from src_addr into the vector array's per-row factors.
//   OP_VEC     n oSRAM lines from src_addr, scaled per row, to dst_addr.
// Mapping pipeline, cycle S = start (the stage is full and the array is free):
//   S+1+c   counter value c, iSRAM read, temporal converters compare (c = 0..P-1)
//   S+3     exponent indexes and tile flags of the mapping reach PP/oAcc (its phase slot)
//   S+P+11  all results of the mapping are in: the oFIFO starts draining
// The loader reads the next mapping's 8 row-operand lines during the current sweep, so a
// new mapping starts every P cycles. A last GEMM step waits (stalls) while the oFIFO still
// holds the previous tile. The command encoding and this schedule are this design's; the
// 8-cycle mapping period and the order of the phases are the paper's.
// Lint reports rst_n as used both asynchronously and synchronously: the second use is only
// the `disable iff` of the oFIFO hand-off assertion below, not a flip-flop.
module mugi_ctrl
  import mugi_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  cmd_t        cmd,
  output logic        busy,
  output logic        done,
  output cmd_t        cfg,          // the command being run
  // row-operand loader (wSRAM in GEMM, oSRAM in NL)
  output logic        ld_re,
  output logic [15:0] ld_addr,
  output logic        ld_wr,        // data of the previous cycle's read are on the SRAM port
  output logic [2:0]  ld_line,
  input  logic        full_next,
  output logic        start,
  // sweep
  output logic        i_re,
  output logic [15:0] i_addr,
  output logic        sweep,        // counter valid (temporal converters enabled)
  output logic [3:0]  cnt,
  output logic        sw_v,         // iSRAM data valid this cycle (one after i_re)
  output logic        sw_first,
  output logic [3:0]  win_off_d,    // window offset that goes with the iSRAM data
  input  logic [3:0]  win_off,      // E-proc result for the mapping starting now
  // phase slot load (PP and oAcc flags)
  output logic        slot_ld,
  output logic        slot_ph,
  output logic        slot_first,
  output logic        slot_last,
  input  logic        active_ph,
  // output path
  output logic        nl_clr,
  output logic        of_ld_res,    // load NL results of phase of_ph into the oFIFO
  output logic        of_ld_sum,    // load the row sums into the oFIFO
  output logic        of_ph,
  output logic        of_start,
  output logic [3:0]  of_ncols,
  input  logic        of_busy,
  input  logic [6:0]  of_line,
  output logic [15:0] drain_addr,
  // oSRAM reads for LDSCALE / VEC and the vector array
  output logic        o_re,
  output logic [15:0] o_raddr,
  output logic        vec_ld,
  output logic        vec_in_v,
  output logic [2:0]  vec_grp,
  output logic [15:0] vec_addr,
  output logic        vec_scale,
  input  logic        vec_out_v,
  // event counters for observation
  output logic        stall
);
  localparam int unsigned EVD = 27;

  typedef struct packed {
    logic        v;
    logic        out;    // the mapping ends a result set
    logic        ph;
    logic        first;
    logic        last;
    logic [15:0] base;
  } ev_t;

  ev_t         ev [EVD];
  logic        run_q;
  logic [15:0] total, map_n, ld_n, k_q, t_q, k_cur;
  logic [3:0]  ld_line_q, nxt_line, per_m1, win_q;
  logic [15:0] nxt_n, l_q;
  logic        is_last, is_first, ev_pend, out_pend, sum_done, gemm, nl;
  logic [15:0] l_d;
  logic        rd_d;

  assign gemm   = cfg.op == OP_GEMM;
  assign nl     = cfg.op == OP_NL;
  assign total  = gemm ? 16'(cfg.n) * 16'(cfg.tiles) : nl ? cfg.n : 16'd0;
  assign per_m1 = (nl && cfg.nl_signed) ? 4'd15 : 4'd7;
  assign is_last  = gemm ? (k_q == cfg.n - 16'd1) : 1'b1;
  assign is_first = gemm ? (k_q == 16'd0) : 1'b1;

  always_comb begin
    ev_pend = 1'b0; out_pend = 1'b0;
    for (int i = 0; i < int'(EVD); i++) begin
      ev_pend  |= ev[i].v;
      out_pend |= ev[i].v & ev[i].out;
    end
  end

  // mapping start: stage full, array free, and (last GEMM step) the oFIFO empty
  logic array_free, can_start, want_start;
  assign array_free = !sweep || cnt == per_m1;
  assign want_start = run_q && (gemm || nl) && map_n < total && full_next && array_free;
  assign can_start  = !(gemm && is_last && (of_busy || out_pend));
  assign start = want_start && can_start;
  assign stall = want_start && !can_start;

  // loader
  always_comb begin
    nxt_n    = start ? ld_n + 16'd1 : ld_n;
    nxt_line = start ? 4'd0 : ld_line_q;
    ld_re    = run_q && (gemm || nl) && nxt_n < total && nxt_line < 4'd8;
    ld_addr  = (gemm ? cfg.w_addr : cfg.src_addr) + (nxt_n << 3) + 16'(nxt_line);
  end

  // iSRAM read during the sweep
  assign i_re   = sweep;
  assign i_addr = gemm ? cfg.i_addr + k_cur : cfg.i_addr + 16'(cnt);

  // oFIFO
  ev_t evo;
  logic sum_go;
  assign evo = ev[32'(per_m1) + 11];       // S + P + 11
  assign sum_go = run_q && nl && cfg.wr_sum && !sum_done && map_n == total && !ev_pend
                  && !of_busy;
  assign of_ld_res = evo.v && evo.out && nl;
  assign of_ld_sum = sum_go;
  assign of_ph     = evo.ph;
  assign of_start  = (evo.v && evo.out) || sum_go;
  assign of_ncols  = gemm ? 4'(COLS) : 4'd1;

  // phase slot load
  assign slot_ld    = ev[2].v;
  assign slot_ph    = ev[2].ph;
  assign slot_first = ev[2].first;
  assign slot_last  = ev[2].last;

  assign nl_clr = cmd_valid && !busy;

  // LDSCALE / VEC
  assign o_re      = run_q && (cfg.op == OP_LDSCALE ? l_q < 16'd8 :
                               cfg.op == OP_VEC     ? l_q < cfg.n : 1'b0);
  assign o_raddr   = cfg.src_addr + l_q;
  assign vec_ld    = rd_d && cfg.op == OP_LDSCALE;
  assign vec_in_v  = (rd_d && cfg.op == OP_VEC) || of_busy;
  assign vec_grp   = (cfg.op == OP_VEC || cfg.op == OP_LDSCALE) ? l_d[2:0] : of_line[2:0];
  assign vec_addr  = (cfg.op == OP_VEC) ? cfg.dst_addr + l_d : drain_addr + 16'(of_line);
  assign vec_scale = (cfg.op == OP_VEC) || (gemm && cfg.scale_en);

  logic fin;
  assign fin = run_q && map_n == total && !ev_pend && !of_busy && !vec_out_v && !of_start
               && !(nl && cfg.wr_sum && !sum_done)
               && !((cfg.op == OP_LDSCALE || cfg.op == OP_VEC) && (o_re || rd_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; run_q <= 1'b0; cfg <= '0;
      map_n <= '0; ld_n <= '0; ld_line_q <= '0; k_q <= '0; t_q <= '0; k_cur <= '0;
      sweep <= 1'b0; cnt <= '0; sw_v <= 1'b0; sw_first <= 1'b0; win_off_d <= '0; win_q <= '0;
      ld_wr <= 1'b0; ld_line <= '0; drain_addr <= '0; sum_done <= 1'b0;
      l_q <= '0; l_d <= '0; rd_d <= 1'b0;
      for (int i = 0; i < int'(EVD); i++) ev[i] <= '0;
    end else begin
      done <= 1'b0;
      if (cmd_valid && !busy) begin
        busy <= 1'b1; run_q <= 1'b1; cfg <= cmd;
        map_n <= '0; ld_n <= '0; ld_line_q <= '0; k_q <= '0; t_q <= '0;
        sum_done <= 1'b0; l_q <= '0;
      end else if (fin) begin
        busy <= 1'b0; run_q <= 1'b0; done <= 1'b1;
      end
      // loader
      if (run_q) begin
        ld_n      <= nxt_n;
        ld_line_q <= ld_re ? nxt_line + 4'd1 : nxt_line;
      end
      ld_wr   <= ld_re;
      ld_line <= nxt_line[2:0];
      // mapping start and sweep counter
      ev[0] <= '0;
      if (start) begin
        map_n <= map_n + 16'd1;
        if (gemm) begin
          if (is_last) begin k_q <= '0; t_q <= t_q + 16'd1; end
          else k_q <= k_q + 16'd1;
        end
        k_cur <= k_q;
        win_q <= gemm ? 4'd0 : win_off;
        sweep <= 1'b1; cnt <= '0;
        ev[0] <= '{v: 1'b1, out: is_last, ph: ~active_ph, first: is_first, last: is_last,
                   base: gemm ? cfg.dst_addr + 16'(t_q * 16'(8 * COLS)) : cfg.dst_addr + (map_n << 3)};
      end else if (sweep) begin
        if (cnt == per_m1) sweep <= 1'b0;
        else cnt <= cnt + 4'd1;
      end
      for (int i = 1; i < int'(EVD); i++) ev[i] <= ev[i-1];
      sw_v      <= sweep;
      sw_first  <= sweep && cnt == 4'd0;
      win_off_d <= win_q;
      // oFIFO drains
      if (of_start && (!of_busy || of_line == 7'(of_ncols) * 7'd8 - 7'd1))
        drain_addr <= sum_go ? cfg.sum_addr : evo.base;
      if (sum_go) sum_done <= 1'b1;
      // LDSCALE / VEC line counter
      if (o_re) l_q <= l_q + 16'd1;
      rd_d <= o_re;
      l_d  <= l_q;
    end
  end

  // the oFIFO must be free (or finishing) whenever a result set is handed over
  a_of_free: assert property (@(posedge clk) disable iff (!rst_n)
    of_start |-> (!of_busy || of_line == 7'(of_ncols) * 7'd8 - 7'd1));
endmodule
