// mugi_pkg: types, constants and arithmetic shared by the Mugi node.
//
// Mugi runs both nonlinear functions (softmax/exp, SiLU, GELU) and BF16 x INT4 GEMM on one
// value-level-parallel (VLP) array. This package holds what several blocks need:
//   * the array shape (ROWS x COLS, 256 x 8 by default, the largest node size evaluated) and
//     the SRAM line geometry derived from it (a line feeds ROWS/8 rows, so a full row set
//     loads in 8 cycles);
//   * the command word the host hands to the controller;
//   * BF16/FP32 helpers: field split, FP32 add (output accumulation), BF16 multiply (vector
//     array), BF16 reciprocal (softmax normalisation) and the exact small-integer multiple
//     c*x that an input accumulator produces by repeated addition.
// All arithmetic rounds to nearest even and flushes subnormals to zero; these are choices of
// this design, the paper names the BF16 format but not its corner cases. Pure functions, no
// timing of their own.
package mugi_pkg;

  // ---------------------------------------------------------------- array geometry
  parameter int unsigned ROWS      = 256;  // array height H
  parameter int unsigned COLS      = 8;    // array width W (3-bit temporal magnitude)
  parameter int unsigned LUT_MAXE  = 16;   // exponents held by one LUT row (iSRAM line)
  parameter int unsigned SRAM_BYTES = 65536; // each of iSRAM, wSRAM, oSRAM

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  localparam bf16_t BF16_ZERO = 16'h0000;
  localparam bf16_t BF16_INF  = 16'h7F80;
  localparam bf16_t BF16_NAN  = 16'h7FC0;

  // class of a BF16 input as seen by the M-proc
  typedef enum logic [1:0] {CLS_NORM = 2'd0, CLS_ZERO = 2'd1, CLS_INF = 2'd2, CLS_NAN = 2'd3} cls_e;

  // what the post-processing block emits for a row
  typedef enum logic [2:0] {
    SP_NONE = 3'd0,  // take the LUT entry selected by the exponent spike
    SP_ZERO = 3'd1,
    SP_INF  = 3'd2,
    SP_NAN  = 3'd3,
    SP_PASS = 3'd4   // pass the input through unchanged (large SiLU/GELU inputs)
  } spec_e;

  // operand held by one array row for one mapping
  typedef struct packed {
    logic        s;      // sign (weight sign in GEMM, input sign in nonlinear mode)
    logic [2:0]  m;      // 3-bit magnitude / rounded mantissa
    logic signed [9:0] e; // unbiased exponent after rounding (nonlinear only)
    cls_e        cls;    // input class (nonlinear only)
    bf16_t       raw;    // the input itself (pass-through)
  } row_op_t;

  // ---------------------------------------------------------------- commands
  typedef enum logic [1:0] {OP_GEMM = 2'd0, OP_NL = 2'd1, OP_LDSCALE = 2'd2, OP_VEC = 2'd3} op_e;

  typedef struct packed {
    op_e         op;
    logic [15:0] n;        // GEMM: K steps per tile; NL: mappings; VEC: lines
    logic [7:0]  tiles;    // GEMM: output tiles (row blocks) sharing the same inputs
    logic [15:0] w_addr;   // wSRAM line of the first weight line
    logic [15:0] i_addr;   // iSRAM line: GEMM inputs, or first LUT row in NL mode
    logic [15:0] src_addr; // oSRAM line: NL inputs, VEC / LDSCALE source
    logic [15:0] dst_addr; // oSRAM line for results
    logic [15:0] sum_addr; // oSRAM line for softmax row sums (NL with wr_sum)
    logic        scale_en; // GEMM / VEC: multiply outputs by the per-row scale
    logic        recip;    // LDSCALE: store reciprocals of the loaded values
    logic        nl_signed;  // NL: inputs of both signs, 16-cycle sign+mantissa sweep
    logic        nl_softmax; // NL: softmax clamping rules (else SiLU/GELU rules)
    logic        win_max;    // NL: window anchored at the largest exponent (else smallest)
    logic        wr_sum;     // NL: accumulate results per row and write the sums at the end
    logic signed [7:0] lut_e0; // NL: exponent of LUT entry 0
    logic [4:0]  lut_ne;     // NL: number of exponents in the LUT row (COLS..LUT_MAXE)
  } cmd_t;

  // ---------------------------------------------------------------- BF16 helpers
  function automatic cls_e bf16_cls(input bf16_t x);
    if (x[14:7] == 8'd0)        return CLS_ZERO;
    else if (x[14:7] != 8'hFF)  return CLS_NORM;
    else if (x[6:0] == 7'd0)    return CLS_INF;
    else                        return CLS_NAN;
  endfunction

  function automatic fp32_t bf16_to_fp32(input bf16_t x);
    return (x[14:7] == 8'd0) ? {x[15], 31'd0} : {x, 16'd0};
  endfunction

  // round FP32 to BF16, nearest even
  function automatic bf16_t fp32_to_bf16(input fp32_t a);
    logic [16:0] t;
    if (a[30:23] == 8'hFF) return (a[22:0] != 0) ? BF16_NAN : {a[31], 15'h7F80};
    if (a[30:23] == 8'd0)  return {a[31], 15'd0};
    t = {1'b0, a[31:16]};
    if (a[15] && (a[14:0] != 0 || a[16])) t = t + 17'd1;
    // a carry into the exponent is handled naturally; exponent 0xFF then reads as INF
    return t[15:0];
  endfunction

  // c * x for a 3-bit c, exactly as repeated addition would give it, rounded once to BF16
  function automatic bf16_t bf16_mul_small(input bf16_t x, input logic [2:0] c);
    logic [10:0] p;
    logic [9:0]  e;
    logic [10:0] sh;
    logic        g, st, up;
    logic [7:0]  mant;
    int unsigned k;
    if (c == 3'd0 || x[14:7] == 8'd0) return {x[15], 15'd0};
    if (x[14:7] == 8'hFF) return x;
    p = 11'({1'b1, x[6:0]}) * 11'(c);
    k = 7;
    for (int i = 10; i >= 7; i--) if (p[i] && k == 7) k = i;
    sh   = p >> (k - 7);
    mant = sh[7:0];
    g  = (k > 7) ? p[k-8] : 1'b0;
    st = 1'b0;
    for (int i = 0; i < 10; i++) if (i < int'(k) - 8 && p[i]) st = 1'b1;
    up = g && (st || mant[0]);
    e  = 10'(x[14:7]) + 10'(k - 7);
    if (up) begin
      if (mant == 8'hFF) begin mant = 8'h80; e = e + 10'd1; end
      else mant = mant + 8'd1;
    end
    if (e >= 10'd255) return {x[15], 15'h7F80};
    return {x[15], e[7:0], mant[6:0]};
  endfunction

  // BF16 x BF16 -> BF16
  function automatic bf16_t bf16_mul(input bf16_t a, input bf16_t b);
    logic        s;
    logic [15:0] p;
    logic signed [10:0] e;
    logic [7:0]  mant;
    logic        g, st;
    s = a[15] ^ b[15];
    if (bf16_cls(a) == CLS_NAN || bf16_cls(b) == CLS_NAN) return BF16_NAN;
    if (bf16_cls(a) == CLS_INF || bf16_cls(b) == CLS_INF) begin
      if (bf16_cls(a) == CLS_ZERO || bf16_cls(b) == CLS_ZERO) return BF16_NAN;
      return {s, 15'h7F80};
    end
    if (bf16_cls(a) == CLS_ZERO || bf16_cls(b) == CLS_ZERO) return {s, 15'd0};
    p = {8'd0, 1'b1, a[6:0]} * {8'd0, 1'b1, b[6:0]};
    e = 11'(a[14:7]) + 11'(b[14:7]) - 11'sd127;
    if (p[15]) begin
      mant = p[15:8]; g = p[7]; st = |p[6:0]; e = e + 11'sd1;
    end else begin
      mant = p[14:7]; g = p[6]; st = |p[5:0];
    end
    if (g && (st || mant[0])) begin
      if (mant == 8'hFF) begin mant = 8'h80; e = e + 11'sd1; end
      else mant = mant + 8'd1;
    end
    if (e <= 11'sd0)   return {s, 15'd0};
    if (e >= 11'sd255) return {s, 15'h7F80};
    return {s, e[7:0], mant[6:0]};
  endfunction

  // 1 / x in BF16: 256/m is formed by an integer divide of the 8-bit significand
  function automatic bf16_t bf16_recip(input bf16_t a);
    logic [17:0] q, r;
    logic [8:0]  m;
    logic signed [10:0] e;
    logic [7:0]  mant;
    logic        g, st;
    case (bf16_cls(a))
      CLS_NAN:  return BF16_NAN;
      CLS_INF:  return {a[15], 15'd0};
      CLS_ZERO: return {a[15], 15'h7F80};
      default: ;
    endcase
    if (a[6:0] == 7'd0) begin
      e = 11'sd254 - 11'(a[14:7]);
      if (e <= 11'sd0) return {a[15], 15'd0};
      return {a[15], e[7:0], 7'd0};
    end
    m = {2'b01, a[6:0]};
    q = 18'h20000 / 18'(m);       // 256/m scaled by 2^9: bit 9 is the hidden one
    r = 18'h20000 % 18'(m);
    mant = q[9:2]; g = q[1]; st = q[0] | (r != 0);
    e = 11'sd253 - 11'(a[14:7]);
    if (g && (st || mant[0])) begin
      if (mant == 8'hFF) begin mant = 8'h80; e = e + 11'sd1; end
      else mant = mant + 8'd1;
    end
    if (e <= 11'sd0) return {a[15], 15'd0};
    return {a[15], e[7:0], mant[6:0]};
  endfunction

  // FP32 + FP32 -> FP32, nearest even, subnormals flushed
  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    logic        sa, sb, sr;
    logic [7:0]  ea, eb;
    logic [27:0] ma, mb, sum;
    logic [8:0]  d;
    logic signed [10:0] er;
    logic [23:0] mant;
    logic        g, st;
    int unsigned lz;
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) begin
      if ((a[30:23] == 8'hFF && a[22:0] != 0) || (b[30:23] == 8'hFF && b[22:0] != 0))
        return 32'h7FC00000;
      if (a[30:23] == 8'hFF && b[30:23] == 8'hFF && a[31] != b[31]) return 32'h7FC00000;
      return (a[30:23] == 8'hFF) ? a : b;
    end
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? {a[31] & b[31], 31'd0} : b;
    if (b[30:23] == 8'd0) return a;
    if (b[30:0] > a[30:0]) begin fp32_t t; t = a; a = b; b = t; end
    sa = a[31]; sb = b[31]; ea = a[30:23]; eb = b[30:23];
    ma = {1'b0, 1'b1, a[22:0], 3'b000};
    mb = {1'b0, 1'b1, b[22:0], 3'b000};
    d  = 9'(ea) - 9'(eb);
    if (d >= 9'd27) mb = 28'(mb != 0);
    else begin
      logic [27:0] lost;
      lost = mb & ((28'd1 << d) - 28'd1);
      mb = (mb >> d) | 28'(lost != 0);
    end
    sr = sa;
    er = 11'(ea);
    if (sa == sb) sum = ma + mb;
    else          sum = ma - mb;
    if (sum == 0) return 32'd0;
    if (sum[27]) begin
      sum = (sum >> 1) | 28'(sum[0]);
      er  = er + 11'sd1;
    end else begin
      lz = 0;
      for (int i = 26; i >= 0; i--) if (sum[i] && lz == 0) lz = 27 - i;
      // lz-1 is the left shift that puts the leading one at bit 26
      sum = sum << (lz - 1);
      er  = er - 11'(lz - 1);
    end
    mant = sum[26:3]; g = sum[2]; st = |sum[1:0];
    if (g && (st || mant[0])) begin
      if (mant == 24'hFFFFFF) begin mant = 24'h800000; er = er + 11'sd1; end
      else mant = mant + 24'd1;
    end
    if (er <= 11'sd0)   return {sr, 31'd0};
    if (er >= 11'sd255) return {sr, 8'hFF, 23'd0};
    return {sr, er[7:0], mant[22:0]};
  endfunction

endpackage
