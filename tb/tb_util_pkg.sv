// tb_util_pkg: helpers shared by the testbenches: BF16 <-> real conversion (nearest even,
// subnormals flushed), so expected values are computed from real arithmetic and not from
// the design's own functions.
package tb_util_pkg;
  function automatic real bf2r(input logic [15:0] b);
    real m;
    int  e;
    if (b[14:7] == 8'd0) return 0.0;
    m = 1.0 + real'(b[6:0]) / 128.0;
    e = int'(b[14:7]) - 127;
    m = m * (2.0 ** e);
    return b[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2bf(input real r);
    logic [63:0] d;
    int          e;
    logic [52:0] f;
    logic [7:0]  mant;
    d = $realtobits(r);
    if (r == 0.0) return {d[63], 15'd0};
    e = int'(d[62:52]) - 1023 + 127;
    f = {1'b1, d[51:0]};
    mant = f[52:45];
    if (f[44] && ((f[43:0] != 0) || mant[0])) begin
      if (mant == 8'hFF) begin mant = 8'h80; e = e + 1; end
      else mant = mant + 8'd1;
    end
    if (e <= 0)   return {d[63], 15'd0};
    if (e >= 255) return {d[63], 15'h7F80};
    return {d[63], e[7:0], mant[6:0]};
  endfunction

  function automatic real f2r(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    e = int'(f[30:23]) - 127;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  function automatic real absr(input real r);
    return (r < 0.0) ? -r : r;
  endfunction
endpackage
