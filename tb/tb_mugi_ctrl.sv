// tb_mugi_ctrl: runs the controller alone against simple models of its neighbours (weight
// stage that fills after 8 written lines, an oFIFO busy for ncols*8 cycles, a one-cycle
// vector array) and checks the command schedule:
//   - loader addresses in order, one line per cycle while the stage has room;
//   - mapping starts P cycles apart (8, or 16 for signed NL) unless a stall is flagged;
//   - counter values 0..P-1 in cycles S+1..S+P, iSRAM addresses of the sweep;
//   - phase slot load at S+3 and the oFIFO hand-off at S+P+11 (NL mappings, last GEMM step);
//   - drain base addresses, LDSCALE groups, VEC addresses and groups, one done per command.
`timescale 1ns/1ps
module tb_mugi_ctrl;
  import mugi_pkg::*;
  logic clk = 0, rst_n = 0; always #1 clk = ~clk;
  logic cmd_valid; cmd_t cmd; logic busy, done; cmd_t cfg;
  logic ld_re, ld_wr; logic [15:0] ld_addr; logic [2:0] ld_line; logic full_next, start;
  logic i_re, sweep, sw_v, sw_first; logic [15:0] i_addr; logic [3:0] cnt, win_off_d, win_off;
  logic slot_ld, slot_ph, slot_first, slot_last, active_ph;
  logic nl_clr, of_ld_res, of_ld_sum, of_ph, of_start, of_busy; logic [3:0] of_ncols; logic [6:0] of_line;
  logic [15:0] drain_addr, o_raddr, vec_addr; logic o_re, vec_ld, vec_in_v, vec_scale, vec_out_v; logic [2:0] vec_grp;
  logic stall;
  mugi_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s @%0t", msg, $time); end
  endtask
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // neighbour models
  int wcnt, ofn, ofl; logic vo_q;
  assign full_next = (wcnt + (ld_wr ? 1 : 0)) == 8;
  assign win_off = 4'd0;
  assign of_busy = ofn > 0;
  assign of_line = 7'(ofl);
  assign vec_out_v = vo_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin wcnt <= 0; ofn <= 0; ofl <= 0; active_ph <= 1; vo_q <= 0; end
    else begin
      vo_q <= vec_in_v;
      wcnt <= start ? 0 : wcnt + (ld_wr ? 1 : 0);
      if (start) active_ph <= ~active_ph;
      if (ofn > 0) begin ofl <= ofl + 1; ofn <= ofn - 1; end
      if (of_start) begin ofn <= int'(of_ncols) * 8; ofl <= 0; end
    end

  // schedule monitor
  int cyc, P, nstart, nstall, nld, nofs, nvec, ndone, last_start, stall_since;
  int starts [$]; logic [15:0] exp_base [$]; logic gemm_out [$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (stall) nstall++;
    if (ld_re) begin chk(ld_addr == 16'((cfg.op == OP_GEMM ? cfg.w_addr : cfg.src_addr) + nld), "ld_addr"); nld++; end
    if (start) begin
      if (nstart > 0 && stall_since == 0) chk(cyc - last_start == P, $sformatf("period %0d", cyc - last_start));
      nstart++; last_start = cyc; stall_since = 0; starts.push_back(cyc);
    end else if (stall) stall_since++;
    foreach (starts[i]) begin
      int d; d = cyc - starts[i];
      if (d >= 1 && d <= P) begin
        chk(sweep && int'(cnt) == d - 1, "sweep counter");
        if (cfg.op == OP_NL) chk(i_re && i_addr == cfg.i_addr + 16'(d - 1), "LUT row address");
      end
      if (d == 3) chk(slot_ld, "slot load at S+3");
    end
    if (slot_ld) chk(starts.size() > 0 && cyc - starts[$] >= 3, "slot load with no mapping");
    if (of_start && !of_ld_sum) begin
      int s;
      // GEMM: the hand-off follows the tile's last step; drop the earlier steps
      if (cfg.op == OP_GEMM) for (int k = 1; k < int'(cfg.n); k++) void'(starts.pop_front());
      s = starts.pop_front();
      chk(cyc - s == P + 11, $sformatf("hand-off at S+%0d", cyc - s));
      nofs++;
    end
    if (ofn == int'(of_ncols) * 8 && ofn > 0) begin
      chk(drain_addr == exp_base[0], $sformatf("drain base %0d exp %0d", drain_addr, exp_base[0]));
      void'(exp_base.pop_front());
    end
    if (vec_ld) begin chk(int'(vec_grp) == nvec, "LDSCALE group"); nvec++; end
    if (vec_in_v && cfg.op == OP_VEC) begin
      chk(vec_addr == cfg.dst_addr + 16'(nvec) && int'(vec_grp) == nvec % 8, "VEC address/group"); nvec++;
    end
    if (done) ndone++;
  end

  task automatic run(cmd_t c, int exp_starts, int exp_of, int exp_vec);
    @(negedge clk);
    nstart = 0; nld = 0; nofs = 0; nvec = 0; ndone = 0; nstall = 0; stall_since = 0; starts = {};
    P = (c.op == OP_NL && c.nl_signed) ? 16 : 8;
    cmd = c; cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    wait (done); @(negedge clk); @(negedge clk);
    chk(nstart == exp_starts, $sformatf("starts %0d exp %0d", nstart, exp_starts));
    chk(nofs == exp_of, $sformatf("hand-offs %0d exp %0d", nofs, exp_of));
    chk(nvec == exp_vec, $sformatf("vector lines %0d exp %0d", nvec, exp_vec));
    chk(ndone == 1 && !busy, "one done");
    chk(exp_base.size() == 0, "all drains seen");
  endtask

  initial begin
    cmd_t c;
    cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      // GEMM: tiles x K; tiles with K = 1 force stalls on the busy oFIFO
      c = '0; c.op = OP_GEMM; c.n = 16'(1 + $urandom % 3); c.tiles = 8'(2 + $urandom % 2);
      c.w_addr = 16'($urandom % 100); c.i_addr = 16'($urandom % 50); c.dst_addr = 16'($urandom % 100);
      if (rep == 0) c.n = 1;
      for (int t = 0; t < int'(c.tiles); t++) exp_base.push_back(c.dst_addr + 16'(64 * t));
      run(c, int'(c.n) * int'(c.tiles), int'(c.tiles), 0);
      if (rep == 0) chk(nstall > 0, "GEMM stall seen");
      // nonlinear, unsigned then signed, with row sums
      c = '0; c.op = OP_NL; c.n = 16'(1 + $urandom % 4); c.nl_signed = rep[0]; c.nl_softmax = !rep[0];
      c.src_addr = 16'($urandom % 100); c.i_addr = 16'($urandom % 100); c.dst_addr = 16'(200 + $urandom % 100);
      c.wr_sum = !rep[0]; c.sum_addr = 16'(400 + $urandom % 10);
      for (int k = 0; k < int'(c.n); k++) exp_base.push_back(c.dst_addr + 16'(8 * k));
      if (c.wr_sum) exp_base.push_back(c.sum_addr);
      run(c, int'(c.n), int'(c.n), 0);
      // LDSCALE and VEC
      c = '0; c.op = OP_LDSCALE; c.src_addr = 16'($urandom % 100);
      run(c, 0, 0, 8);
      c = '0; c.op = OP_VEC; c.n = 16'(1 + $urandom % 20); c.src_addr = 16'($urandom % 100); c.dst_addr = 16'($urandom % 100);
      run(c, 0, 0, int'(c.n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
