// eva_pkg: constants, types and arithmetic helpers shared by the EVA
// vector-quantised decoding core.
//
// The architecture sizes (vector dimension d = 8, 8-bit weight indices,
// tile height v = 32, four epilogue units, up to four codebooks) are
// parameters of the modules that use them, not package constants.
//
// Extended partial-sum format (ext_t). FP16 products and sums are carried
// between adders as an 8-bit exponent e and a 32-bit two's-complement
// mantissa m, with value = m * 2^(e - 56). An FP16 product (22-bit
// significand product shifted left by 6) then has e = ea + eb, the output
// of the small exponent adder, and an FP16 operand has e = e16 + 17 with its
// 11-bit significand shifted left by 14. Adders keep |m| < 2^30, so the
// 32-bit integer adder of the INT8 datapath can be reused unchanged. This
// format is a choice of this implementation; rounding to FP16 happens only
// when a result leaves the GEMM unit or the output buffer.
package eva_pkg;

  typedef logic [15:0] fp16_t;

  typedef struct packed {
    logic        [7:0]  e;
    logic signed [31:0] m;
  } ext_t;

  localparam ext_t EXT_ZERO = '{e: 8'd0, m: 32'sd0};

  typedef enum logic {MODE_INT8 = 1'b0, MODE_FP16 = 1'b1} pe_mode_e;

  // FP16 -> extended format (subnormals flush to zero).
  function automatic ext_t fp16_to_ext(input fp16_t h);
    ext_t r;
    logic signed [31:0] mag;
    if (h[14:10] == 5'd0) return EXT_ZERO;
    mag = 32'(signed'({1'b0, 1'b1, h[9:0]})) <<< 14;
    r.m = h[15] ? -mag : mag;
    r.e = 8'(h[14:10]) + 8'd17;
    return r;
  endfunction

  // Alignment followed by a 32-bit add. In integer mode the exponents are
  // ignored and the mantissas are added as INT32 values.
  function automatic ext_t ext_add(input ext_t a, input ext_t b, input logic int_mode);
    ext_t r;
    ext_t op_hi, op_lo;
    logic [7:0] diff;
    logic signed [31:0] sm;
    logic signed [32:0] sum;
    if (int_mode) begin
      r.e = 8'd0;
      r.m = a.m + b.m;
      return r;
    end
    if (a.m == 0) return b;
    if (b.m == 0) return a;
    if (a.e >= b.e) begin op_hi = a; op_lo = b; end
    else            begin op_hi = b; op_lo = a; end
    diff = op_hi.e - op_lo.e;
    sm   = (diff > 8'd31) ? 32'sd0 : (op_lo.m >>> diff);
    sum  = 33'(op_hi.m) + 33'(sm);
    if (sum[32:30] != 3'b000 && sum[32:30] != 3'b111) begin
      r.m = 32'(sum >>> 1);
      r.e = op_hi.e + 8'd1;
    end else begin
      r.m = 32'(sum);
      r.e = op_hi.e;
    end
    if (r.m == 0) r.e = 8'd0;
    return r;
  endfunction

  // Extended format -> FP16, round to nearest even. Overflow saturates to
  // the largest finite value, underflow flushes to a signed zero.
  function automatic fp16_t ext_to_fp16(input ext_t x);
    logic        s;
    logic [31:0] mag;
    logic [30:0] norm;                    // bits below the leading one
    int          p;
    int          ex;
    logic [10:0] mant;
    logic        g, st;
    s   = x.m[31];
    mag = s ? 32'(-x.m) : 32'(x.m);
    if (mag == 0) return 16'h0000;
    p = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) p = i;
    norm = 31'(mag << (31 - p));          // leading one shifted out at bit 31
    ex   = p + int'(x.e) - 41;
    mant = {1'b0, norm[30:21]};
    g    = norm[20];
    st   = |norm[19:0];
    if (g && (st || mant[0])) mant = mant + 11'd1;
    if (mant[10]) begin mant = 11'd0; ex = ex + 1; end
    if (ex >= 31) return {s, 15'h7BFF};
    if (ex <= 0)  return {s, 15'h0000};
    return {s, ex[4:0], mant[9:0]};
  endfunction

endpackage
