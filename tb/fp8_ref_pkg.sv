// fp8_ref_pkg: reference arithmetic for the testbenches.
//
// Decodes E5M2/E4M3 words to real numbers, evaluates the exact operation in double
// precision and rounds the magnitude onto the FP8 grid by searching the (monotonic)
// positive encodings. For each result it returns the encodings that a given rounding mode
// accepts (one for the correctly rounded and directed modes, two for faithful rounding).
// Results outside the normal range, and operands that are not normal numbers, are
// reported as not checkable. Double precision is exact for products of FP8 values; for
// quotients and roots its error is far below the distance to any FP8 grid point or
// midpoint, so ties and exact cases are still recognised.
// The package also holds a second, independent copy of the integer expressions
// (constants and operand shifts) so that a carry-in can be judged on its own.
package fp8_ref_pkg;
  import fp8_pkg::*;

  typedef struct {
    bit       ok;      // result is checkable
    bit [7:0] acc0;    // accepted encoding
    bit [7:0] acc1;    // second accepted encoding (== acc0 unless faithful)
  } ref_t;

  function automatic bit is_normal(fmt_e f, bit [7:0] x);
    if (f == FMT_E5M2) return x[6:2] != 5'd0 && x[6:2] != 5'd31;
    else               return x[6:3] != 4'd0 && x[6:0] != 7'h7f;
  endfunction

  function automatic real mag(fmt_e f, bit [6:0] x);
    int e, m, bias, mb;
    real v;
    mb   = (f == FMT_E5M2) ? 2 : 3;
    bias = (f == FMT_E5M2) ? 15 : 7;
    e    = int'(x >> mb);
    m    = int'(x) & ((1 << mb) - 1);
    v    = 1.0 + real'(m) / real'(1 << mb);
    e    = e - bias;
    while (e > 0) begin v = v * 2.0; e--; end
    while (e < 0) begin v = v / 2.0; e++; end
    return v;
  endfunction

  function automatic real value(fmt_e f, bit [7:0] x);
    return x[7] ? -mag(f, x[6:0]) : mag(f, x[6:0]);
  endfunction

  // Exact result of an operation; ok = 0 for operands outside the checked domain.
  function automatic real exact(fmt_e f, op_e op, bit [7:0] x, bit [7:0] y, output bit ok);
    real vx, vy;
    ok = is_normal(f, x);
    if (op == OP_MUL || op == OP_DIV) ok = ok && is_normal(f, y);
    if (op == OP_SQRT || op == OP_RSQRT) ok = ok && !x[7];
    vx = value(f, x);
    vy = value(f, y);
    unique case (op)
      OP_MUL:   return vx * vy;
      OP_SQ:    return vx * vx;
      OP_DIV:   return vx / vy;
      OP_REC:   return 1.0 / vx;
      OP_SQRT:  return $sqrt(vx);
      default:  return 1.0 / $sqrt(vx);
    endcase
  endfunction

  function automatic ref_t round_ref(fmt_e f, real v, rmode_e rm);
    ref_t     res;
    bit       s;
    real      a, vlo, vhi, mid;
    bit [6:0] lo, hi, top, pick;
    res.ok = 0;
    res.acc0 = '0;
    res.acc1 = '0;
    s   = v < 0.0;
    a   = s ? -v : v;
    top = (f == FMT_E5M2) ? 7'h7b : 7'h7e;
    if (a < mag(f, (f == FMT_E5M2) ? 7'h04 : 7'h08) || a > mag(f, top)) return res;
    lo = (f == FMT_E5M2) ? 7'h04 : 7'h08;
    while (lo < top && mag(f, lo + 7'd1) <= a) lo++;
    vlo = mag(f, lo);
    res.ok = 1;
    if (vlo == a) begin
      res.acc0 = {s, lo};
      res.acc1 = {s, lo};
      return res;
    end
    hi  = lo + 7'd1;
    vhi = mag(f, hi);
    mid = (vlo + vhi) / 2.0;
    unique case (rm)
      RM_RU:  pick = s ? lo : hi;
      RM_RD:  pick = s ? hi : lo;
      RM_RZ:  pick = lo;
      RM_FAITH: pick = lo;
      default: begin
        if (a < mid)      pick = lo;
        else if (a > mid) pick = hi;
        else if (rm == RM_RNE) pick = lo[0] ? hi : lo;
        else if (rm == RM_RNA) pick = hi;
        else                   pick = lo;
      end
    endcase
    res.acc0 = {s, pick};
    res.acc1 = (rm == RM_FAITH) ? {s, hi} : {s, pick};
    return res;
  endfunction

  // Integer expression of the operation without its carry-in (independent copy).
  function automatic bit [7:0] int_expr(fmt_e f, op_e op, bit [7:0] x, bit [7:0] y);
    bit e5;
    e5 = (f == FMT_E5M2);
    unique case (op)
      OP_MUL:   return x + y + (e5 ? 8'd196 : 8'd200);
      OP_SQ:    return 8'(x * 2) + (e5 ? 8'd196 : 8'd200);
      OP_DIV:   return x - y + (e5 ? 8'd59 : 8'd55);
      OP_REC:   return (e5 ? 8'd119 : 8'd111) - x;
      OP_SQRT:  return 8'(x / 2) + (e5 ? 8'd30 : 8'd27);
      default:  return 8'(($signed(8'(-x)) >>> 1)) + (e5 ? 8'd90 : 8'd83);
    endcase
  endfunction

  // Which (format, operation, mode) combinations are reachable, per the summary tables.
  function automatic bit reachable(fmt_e f, op_e op, rmode_e rm);
    if (f == FMT_E5M2) return !((op == OP_SQRT || op == OP_RSQRT) && (rm == RM_RD || rm == RM_RZ));
    unique case (op)
      OP_MUL:            return rm != RM_RU && rm != RM_RD;
      OP_SQ:             return rm != RM_RU;
      OP_DIV, OP_REC:    return rm != RM_RU && rm != RM_RD && rm != RM_RZ;
      default:           return rm != RM_RU;
    endcase
  endfunction

endpackage
