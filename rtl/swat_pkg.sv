// swat_pkg: shared types and FP16 arithmetic of the SWAT window-attention
// accelerator.
//
// All datapath values are IEEE-754 binary16 ("FP16"), the precision the
// accelerator is built for. The functions below are combinational and
// synthesizable; the modules place pipeline registers around them.
//
// Arithmetic conventions (this design's own choices, the FP16 format itself
// is the only thing fixed by the architecture):
//   * subnormal inputs and results are flushed to zero,
//   * rounding is to nearest, ties away from zero,
//   * overflow saturates to infinity; NaN is not produced or propagated
//     (an infinite operand gives an infinite result).
//
// The adder is split into three functions (align, add, normalise) so that a
// pipelined accumulator can register between them. The loop-carried
// dependency through these three registers is what fixes the initiation
// interval of the FP16 accumulators at 3 cycles.
//
// fp16_exp evaluates exp(x) = 2^(x*log2 e): the integer part of x*log2 e
// becomes the exponent and 2^f for the fraction f in [0,1) is a cubic
// polynomial 1 + c1 f + c2 f^2 + c3 f^3 (c1=0.6951, c2=0.2262, c3=0.0787,
// relative error below 2e-4) in Q.14 fixed point.
package swat_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;

  // Stage indices of the row pipeline, in the order a row passes them.
  typedef enum logic [2:0] {
    ST_LOAD = 3'd0,
    ST_QK   = 3'd1,
    ST_SV   = 3'd2,
    ST_RED1 = 3'd3,   // ZRED1 and ROWSUM1 run side by side
    ST_RED2 = 3'd4,   // ZRED2 and ROWSUM2 run side by side
    ST_DIV  = 3'd5    // division and output
  } stage_e;

  localparam int unsigned NSTAGE = 6;

  // ------------------------------------------------------------------
  // Multiplication
  // ------------------------------------------------------------------
  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [12:0] p;      // bits 21..9 of the 22-bit mantissa product
    logic [11:0] m;
    logic        r;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'd0};
    if (a[14:10] == 5'd31 || b[14:10] == 5'd31) return {s, 15'h7C00};
    p = 13'((22'({1'b1, a[9:0]}) * 22'({1'b1, b[9:0]})) >> 9);
    if (p[12]) begin
      m = {1'b0, p[12:2]};
      r = p[1];
      e = int'(a[14:10]) + int'(b[14:10]) - 14;
    end else begin
      m = {1'b0, p[11:1]};
      r = p[0];
      e = int'(a[14:10]) + int'(b[14:10]) - 15;
    end
    m = m + 12'(r);
    if (m[11]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0) return {s, 15'd0};
    if (e >= 31) return {s, 15'h7C00};
    return {s, e[4:0], m[9:0]};
  endfunction

  // ------------------------------------------------------------------
  // Addition, in three pipeline-friendly pieces
  // ------------------------------------------------------------------
  typedef struct packed {
    logic        special;  // result already known (zero operand or infinity)
    fp16_t       res;      // that result
    logic        sign;     // sign of the larger operand
    logic        sub;      // signs differ
    logic [4:0]  exp;      // exponent of the larger operand
    logic [13:0] ma;       // larger mantissa, hidden bit at [13], 3 guard bits
    logic [13:0] mb;       // smaller mantissa aligned to ma
  } add_align_t;

  typedef struct packed {
    logic        special;
    fp16_t       res;
    logic        sign;
    logic [4:0]  exp;
    logic [14:0] sum;      // magnitude of the mantissa sum or difference
  } add_sum_t;

  function automatic add_align_t fp16_add_align(fp16_t a, fp16_t b);
    add_align_t o;
    fp16_t      x, y;
    int         d;
    logic       az, bz;
    o  = '0;
    az = (a[14:10] == 5'd0);
    bz = (b[14:10] == 5'd0);
    if (az && bz) begin
      o.special = 1'b1;
      o.res     = {a[15] & b[15], 15'd0};
      return o;
    end
    if (az) begin o.special = 1'b1; o.res = b; return o; end
    if (bz) begin o.special = 1'b1; o.res = a; return o; end
    if (a[14:10] == 5'd31) begin o.special = 1'b1; o.res = {a[15], 15'h7C00}; return o; end
    if (b[14:10] == 5'd31) begin o.special = 1'b1; o.res = {b[15], 15'h7C00}; return o; end
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d      = int'(x[14:10]) - int'(y[14:10]);
    o.sign = x[15];
    o.sub  = x[15] ^ y[15];
    o.exp  = x[14:10];
    o.ma   = {1'b1, x[9:0], 3'b000};
    o.mb   = (d > 13) ? 14'd0 : ({1'b1, y[9:0], 3'b000} >> d);
    return o;
  endfunction

  function automatic add_sum_t fp16_add_sum(add_align_t i);
    add_sum_t o;
    o.special = i.special;
    o.res     = i.res;
    o.sign    = i.sign;
    o.exp     = i.exp;
    o.sum     = i.sub ? ({1'b0, i.ma} - {1'b0, i.mb}) : ({1'b0, i.ma} + {1'b0, i.mb});
    return o;
  endfunction

  function automatic fp16_t fp16_add_norm(add_sum_t i);
    logic [14:0] n;
    logic [11:0] m;
    int          e;
    int          lz;
    if (i.special) return i.res;
    if (i.sum == 15'd0) return FP16_ZERO;
    n = i.sum;
    e = int'(i.exp);
    if (n[14]) begin
      // carry out: round at bit 3 of the shifted value
      m = {1'b0, n[14:4]} + 12'(n[3]);
      e = e + 1;
    end else begin
      lz = 0;
      for (int k = 13; k >= 0; k--) begin
        if (n[k]) break;
        lz++;
      end
      n = n << lz;
      e = e - lz;
      m = {1'b0, n[13:3]} + 12'(n[2]);
    end
    if (m[11]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0) return {i.sign, 15'd0};
    if (e >= 31) return {i.sign, 15'h7C00};
    return {i.sign, e[4:0], m[9:0]};
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    return fp16_add_norm(fp16_add_sum(fp16_add_align(a, b)));
  endfunction

  // ------------------------------------------------------------------
  // Division a / b
  // ------------------------------------------------------------------
  function automatic fp16_t fp16_div(fp16_t a, fp16_t b);
    logic        s;
    logic [22:0] num;
    logic [12:0] q;
    logic [11:0] m;
    int          e;
    s = a[15] ^ b[15];
    if (b[14:10] == 5'd0 || a[14:10] == 5'd31) return {s, 15'h7C00};
    if (a[14:10] == 5'd0 || b[14:10] == 5'd31) return {s, 15'd0};
    num = {1'b1, a[9:0], 12'd0};
    q   = 13'(num / {12'd0, 1'b1, b[9:0]});
    if (q[12]) begin
      m = {1'b0, q[12:2]} + 12'(q[1]);
      e = int'(a[14:10]) - int'(b[14:10]) + 15;
    end else begin
      m = {1'b0, q[11:1]} + 12'(q[0]);
      e = int'(a[14:10]) - int'(b[14:10]) + 14;
    end
    if (m[11]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0) return {s, 15'd0};
    if (e >= 31) return {s, 15'h7C00};
    return {s, e[4:0], m[9:0]};
  endfunction

  // ------------------------------------------------------------------
  // Exponential exp(x)
  // ------------------------------------------------------------------
  localparam int LOG2E_Q14 = 23637;   // round(log2(e) * 2^14)
  localparam int EXP_C1    = 11389;   // 0.6951 * 2^14
  localparam int EXP_C2    = 3706;    // 0.2262 * 2^14
  localparam int EXP_C3    = 1289;    // 0.0787 * 2^14

  function automatic fp16_t fp16_exp(fp16_t x);
    logic signed [31:0] xf;   // x in Q.14
    logic signed [47:0] t;    // x*log2(e) in Q.14
    logic        [31:0] mag;
    logic signed [31:0] n;
    logic        [13:0] f;
    logic        [31:0] p;
    logic        [11:0] m;
    int                 sh;
    int                 e;
    if (x[14:10] == 5'd0) return FP16_ONE;
    if (x[14:10] >= 5'd19) return x[15] ? FP16_ZERO : FP16_INF;   // |x| >= 16
    // magnitude of x in Q.14: mantissa * 2^(exp-25) * 2^14
    sh  = int'(x[14:10]) - 11;
    mag = (sh >= 0) ? (32'({1'b1, x[9:0]}) << sh) : (32'({1'b1, x[9:0]}) >> (-sh));
    xf  = x[15] ? -$signed(mag) : $signed(mag);
    t   = (48'(xf) * 48'(LOG2E_Q14)) >>> 14;
    n   = 32'(t >>> 14);
    f   = t[13:0];
    // 2^f in Q.14, Horner form
    p = (32'(EXP_C3) * 32'(f)) >> 14;
    p = ((p + 32'(EXP_C2)) * 32'(f)) >> 14;
    p = ((p + 32'(EXP_C1)) * 32'(f)) >> 14;
    p = p + 32'd16384;
    e = int'(n) + 15;
    if (p[15]) begin
      // 2^f rounded up to 2.0
      m = 12'h400;
      e = e + 1;
    end else begin
      m = {1'b0, p[14:4]} + 12'(p[3]);
    end
    if (m[11]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0) return FP16_ZERO;
    if (e >= 31) return FP16_INF;
    return {1'b0, e[4:0], m[9:0]};
  endfunction

endpackage
