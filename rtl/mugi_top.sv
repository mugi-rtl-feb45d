// mugi_top: one Mugi node, the value-level-parallel array shared by nonlinear functions and
// BF16 x INT4 GEMM.
//
// Data path (numbers are the four phases of VLP approximation):
//   oSRAM -> M-proc (1) -> wFIFO -> TC (3)             rows: nonlinear inputs
//   wSRAM ------------------> wFIFO -> TC (3)          rows: INT4 weights / KV cache
//   wFIFO stage -> E-proc (1) -> window offset, exponent indexes
//   iSRAM (2) -> SW -> iFIFO -> iAcc -> columns        LUT rows, or BF16 inputs (GEMM)
//   array rows -> OR sets + SC -> PP (4) / oAcc -> oFIFO -> Vec -> oSRAM
// In GEMM mode a row's spike at c = |w| picks c*x from each column (x summed c times by
// iAcc), oAcc keeps COLS output-stationary FP32 sums per row, and the tile drains through
// the vector array, optionally multiplied by per-row dequantisation scales. In nonlinear
// mode the columns carry the LUT row of the counter's mantissa, a row's spike at its own
// mantissa picks that row, and PP picks the entry of the row's exponent; results drain per
// mapping, oAcc sums them per row for softmax, and OP_VEC later scales by the reciprocals.
// The host side (off-chip memory) writes the three SRAMs and reads the oSRAM while the node
// is idle; cmd_valid starts a command (see mugi_ctrl), done pulses at its end.
// The mesh network that joins nodes is not part of this module.
// Timing: a new mapping starts every 8 cycles (16 for signed nonlinear functions); a
// mapping's results reach the oFIFO P+11 cycles after its start and drain one oSRAM line per
// cycle (8 lines per NL mapping, 64 per GEMM tile); see mugi_ctrl for the exact schedule.
// Lint notes: the oFIFO's out_v pin is left open because the controller already knows when
// the oFIFO is busy; rst_n is reported as used both asynchronously and synchronously only
// because the controller's handshake assertion is disabled during reset. Some command fields
// and address bits are unused at the default sizes (addresses are 16 bits in the command,
// fewer in the SRAMs).
module mugi_top
  import mugi_pkg::*;
#(
  parameter int unsigned H = mugi_pkg::ROWS,
  parameter int unsigned W = mugi_pkg::COLS,
  localparam int unsigned OL  = H / 8,
  localparam int unsigned IWD = LUT_MAXE * 16,
  localparam int unsigned WWD = H * 4 / 8,
  localparam int unsigned OWD = H * 16 / 8,
  localparam int unsigned IDP = SRAM_BYTES * 8 / IWD,
  localparam int unsigned WDP = SRAM_BYTES * 8 / WWD,
  localparam int unsigned ODP = SRAM_BYTES * 8 / OWD
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  input  cmd_t                   cmd,
  output logic                   busy,
  output logic                   done,
  // host / off-chip side
  input  logic                   h_i_we,
  input  logic [$clog2(IDP)-1:0] h_i_addr,
  input  logic [IWD-1:0]         h_i_wdata,
  input  logic                   h_w_we,
  input  logic [$clog2(WDP)-1:0] h_w_addr,
  input  logic [WWD-1:0]         h_w_wdata,
  input  logic                   h_o_we,
  input  logic [$clog2(ODP)-1:0] h_o_waddr,
  input  logic [OWD-1:0]         h_o_wdata,
  input  logic                   h_o_re,
  input  logic [$clog2(ODP)-1:0] h_o_raddr,
  output logic [OWD-1:0]         o_rdata
);
  cmd_t cfg;
  logic gemm;
  assign gemm = cfg.op == OP_GEMM;

  // ---------------------------------------------------------------- controller
  logic        ld_re, ld_wr, full_next, start, i_re, sweep, sw_v, sw_first;
  logic [15:0] ld_addr, i_addr_c, drain_addr, o_raddr_c, vec_addr;
  logic [2:0]  ld_line, vec_grp;
  logic [3:0]  cnt, win_off_d, win_off, of_ncols;
  logic        slot_ld, slot_ph, slot_first, slot_last, active_ph, nl_clr;
  logic        of_ld_res, of_ld_sum, of_ph, of_start, of_busy, o_re_c;
  logic        vec_ld, vec_in_v, vec_scale, vec_out_v, stall;
  logic [6:0]  of_line;

  mugi_ctrl u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .done, .cfg,
    .ld_re, .ld_addr, .ld_wr, .ld_line, .full_next, .start,
    .i_re, .i_addr(i_addr_c), .sweep, .cnt, .sw_v, .sw_first, .win_off_d, .win_off,
    .slot_ld, .slot_ph, .slot_first, .slot_last, .active_ph,
    .nl_clr, .of_ld_res, .of_ld_sum, .of_ph, .of_start, .of_ncols, .of_busy, .of_line,
    .drain_addr, .o_re(o_re_c), .o_raddr(o_raddr_c), .vec_ld, .vec_in_v, .vec_grp,
    .vec_addr, .vec_scale, .vec_out_v, .stall
  );

  // ---------------------------------------------------------------- SRAMs
  logic [IWD-1:0] i_rdata;
  logic [WWD-1:0] w_rdata;
  logic           vo_v;
  logic [15:0]    vo_addr;
  bf16_t          vo_data [OL];
  logic [OWD-1:0] vo_line;

  always_comb for (int i = 0; i < int'(OL); i++) vo_line[16*i +: 16] = vo_data[i];

  mugi_sram #(.WIDTH(IWD)) u_isram (
    .clk, .we(h_i_we), .waddr(h_i_addr), .wdata(h_i_wdata),
    .re(i_re), .raddr(i_addr_c[$clog2(IDP)-1:0]), .rdata(i_rdata));
  mugi_sram #(.WIDTH(WWD)) u_wsram (
    .clk, .we(h_w_we), .waddr(h_w_addr), .wdata(h_w_wdata),
    .re(ld_re && gemm), .raddr(ld_addr[$clog2(WDP)-1:0]), .rdata(w_rdata));
  mugi_sram #(.WIDTH(OWD)) u_osram (
    .clk,
    .we(vo_v || h_o_we),
    .waddr(vo_v ? vo_addr[$clog2(ODP)-1:0] : h_o_waddr),
    .wdata(vo_v ? vo_line : h_o_wdata),
    .re((ld_re && !gemm) || o_re_c || h_o_re),
    .raddr((ld_re && !gemm) ? ld_addr[$clog2(ODP)-1:0] :
           o_re_c ? o_raddr_c[$clog2(ODP)-1:0] : h_o_raddr),
    .rdata(o_rdata));

  // ---------------------------------------------------------------- phase 1: rows
  row_op_t mp_ops [OL];
  row_op_t wr_ops [OL];
  for (genvar i = 0; i < OL; i++) begin : g_mproc
    m_proc u_mp (.x(o_rdata[16*i +: 16]), .op(mp_ops[i]));
    always_comb begin
      if (gemm) begin
        wr_ops[i]     = '0;
        wr_ops[i].s   = w_rdata[4*i + 3];         // INT4 sign-magnitude weight
        wr_ops[i].m   = w_rdata[4*i +: 3];
        wr_ops[i].cls = CLS_NORM;
      end else wr_ops[i] = mp_ops[i];
    end
  end

  row_op_t stage_next [H];
  row_op_t active [H];
  wfifo #(.H(H)) u_wfifo (
    .clk, .rst_n, .clr(1'b0), .wr(ld_wr), .wr_line(ld_line), .wr_ops,
    .start, .stage_next, .full_next, .active, .active_ph);

  logic [2:0] ep_idx  [H];
  spec_e      ep_spec [H];
  e_proc #(.N(H)) u_eproc (
    .ops(stage_next), .win_max(cfg.win_max), .softmax(cfg.nl_softmax),
    .lut_e0(cfg.lut_e0), .lut_ne(cfg.lut_ne), .win_off, .idx(ep_idx), .spec(ep_spec));

  logic [2:0] m_idx  [H];
  spec_e      m_spec [H];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(H); r++) begin m_idx[r] <= '0; m_spec[r] <= SP_NONE; end
    end else if (start) begin
      m_idx <= ep_idx; m_spec <= ep_spec;
    end
  end

  // ---------------------------------------------------------------- phase 2: columns
  bf16_t lut_row [LUT_MAXE];
  bf16_t win [W];
  logic  if_v [W], if_first [W];
  bf16_t if_val [W];
  bf16_t col_val [W];

  always_comb for (int e = 0; e < int'(LUT_MAXE); e++) lut_row[e] = i_rdata[16*e +: 16];

  sw #(.W(W)) u_sw (.row(lut_row), .off(win_off_d), .win);
  ififo #(.W(W)) u_ififo (
    .clk, .rst_n, .in_v(sw_v), .in_first(sw_first), .in_val(win),
    .out_v(if_v), .out_first(if_first), .out_val(if_val));
  for (genvar j = 0; j < W; j++) begin : g_iacc
    iacc u_iacc (.clk, .rst_n, .gemm, .in_v(if_v[j]), .in_first(if_first[j]),
                 .in_val(if_val[j]), .out_val(col_val[j]));
  end

  // ---------------------------------------------------------------- phase 3: array
  logic tc_sp [H], tc_ph [H], tc_s [H];
  logic sp_q [H], ph_q [H], s_q [H];
  for (genvar r = 0; r < H; r++) begin : g_tc
    tc u_tc (.en(sweep), .cnt, .sgn_mode(!gemm && cfg.nl_signed), .phase(active_ph),
             .op(active[r]), .spike(tc_sp[r]), .spike_ph(tc_ph[r]), .spike_s(tc_s[r]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(H); r++) begin sp_q[r] <= 1'b0; ph_q[r] <= 1'b0; s_q[r] <= 1'b0; end
    end else begin
      sp_q <= tc_sp; ph_q <= tc_ph; s_q <= tc_s;
    end
  end

  logic [1:0] bv    [H];
  logic [2:0] bidx  [H][2];
  bf16_t      bdata [H][2];
  vlp_array #(.H(H), .W(W)) u_array (
    .clk, .rst_n, .gemm, .spike(sp_q), .spike_ph(ph_q), .spike_s(s_q), .col_val,
    .bv, .bidx, .bdata);

  // ---------------------------------------------------------------- phase 4 and outputs
  logic [1:0] first_q, last_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin first_q <= '0; last_q <= '0; end
    else if (slot_ld) begin first_q[slot_ph] <= slot_first; last_q[slot_ph] <= slot_last; end
  end

  bf16_t      pp_res   [H][2];
  logic [1:0] pp_rv    [H];
  bf16_t      pp_rdata [H][2];
  logic [1:0] fin_en   [H];
  logic [2:0] fin_col  [H][2];
  bf16_t      fin_data [H][2];
  bf16_t      sums     [H];
  bf16_t      of_ld_data [H];

  for (genvar r = 0; r < H; r++) begin : g_out
    pp u_pp (.clk, .rst_n, .ld(slot_ld && !gemm), .ld_ph(slot_ph), .ld_idx(m_idx[r]),
             .ld_spec(m_spec[r]), .ld_raw(active[r].raw), .bv(bv[r]), .bidx(bidx[r]),
             .bdata(bdata[r]), .res(pp_res[r]), .rv(pp_rv[r]), .rdata(pp_rdata[r]));
    oacc #(.W(W)) u_oacc (.clk, .rst_n, .gemm, .clr(nl_clr), .bv(bv[r]), .bidx(bidx[r]),
             .bdata(bdata[r]), .first(first_q), .last(last_q), .rv(pp_rv[r] & {2{cfg.wr_sum}}),
             .rdata(pp_rdata[r]), .fin_en(fin_en[r]), .fin_col(fin_col[r]),
             .fin_data(fin_data[r]), .sum(sums[r]));
    assign of_ld_data[r] = of_ld_sum ? sums[r] : pp_res[r][of_ph];
  end

  bf16_t of_data [OL];
  ofifo #(.H(H), .W(W)) u_ofifo (
    .clk, .rst_n, .wr_en(fin_en), .wr_col(fin_col), .wr_data(fin_data),
    .ld(of_ld_res || of_ld_sum), .ld_data(of_ld_data), .start(of_start), .ncols(of_ncols),
    .busy(of_busy), .out_v(), .out_line(of_line), .out_data(of_data));

  bf16_t vin_data [OL];
  bf16_t vld_data [OL];
  always_comb
    for (int i = 0; i < int'(OL); i++) begin
      vld_data[i] = o_rdata[16*i +: 16];
      vin_data[i] = (cfg.op == OP_VEC) ? o_rdata[16*i +: 16] : of_data[i];
    end

  vec #(.H(H)) u_vec (
    .clk, .rst_n, .ld(vec_ld), .ld_grp(vec_grp), .ld_recip(cfg.recip), .ld_data(vld_data),
    .in_v(vec_in_v), .scale_en(vec_scale), .in_grp(vec_grp), .in_addr(vec_addr),
    .in_data(vin_data), .out_v(vo_v), .out_addr(vo_addr), .out_data(vo_data));
  assign vec_out_v = vo_v;
endmodule
