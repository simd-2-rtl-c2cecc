// simd2_ref_pkg: reference arithmetic for the SIMD^2 testbenches.
//
// Works through double-precision `real` values, independently of the RTL's bit-level
// datapath: fp16 and fp32 values are turned into exact doubles, the operation is done in
// double precision, and the double is rounded to fp32 (nearest even) with the same
// conventions as the RTL: fp32 subnormals flushed to zero, canonical quiet NaN. A single fp32
// add or multiply computed in double and then rounded is correctly rounded, because double
// has more than twice the fp32 significand bits.
package simd2_ref_pkg;
  import simd2_pkg::*;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'hff)
      d = (f[22:0] == 0) ? {f[31], 11'h7ff, 52'd0} : {1'b0, 11'h7ff, 1'b1, 51'd0};
    else if (f[30:23] == 8'h00) d = {f[31], 63'd0};
    else d = {f[31], 11'(32'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real v;
    int  e;
    e = int'(h[14:10]);
    if (e == 31) v = (h[9:0] == 0) ? 1.0e300 * 1.0e300 : 0.0 / 0.0;
    else if (e == 0) v = real'(h[9:0]) * (2.0 ** -24);
    else v = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [23:0] m;
    logic        g, st;
    logic [24:0] mr;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'h7ff) return (d[51:0] == 0) ? {d[63], 8'hff, 23'd0} : FP32_QNAN;
    if (d[62:52] == 11'h000) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = d[27:0] != 0;
    mr = {1'b0, m} + 25'(g & (st | m[0]));
    if (mr[24]) begin mr = mr >> 1; e++; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] h2f(input logic [15:0] h);
    return r2f(h2r(h));
  endfunction

  // minimum / maximum with -0 ordered below +0
  function automatic logic less(input logic [31:0] a, input logic [31:0] b);
    real x, y;
    x = f2r(a); y = f2r(b);
    if (x == y) return a[31] && !b[31];
    return x < y;
  endfunction

  function automatic logic [31:0] ref_oplus(input oplus_op_e op, input logic [31:0] a,
                                            input logic [31:0] b);
    case (op)
      OP_ADD: return r2f(f2r(a) + f2r(b));
      OP_SUB: return r2f(f2r(a) - f2r(b));
      OP_MIN: return less(a, b) ? a : b;
      OP_MAX: return less(a, b) ? b : a;
      OP_OR:  return (f2r(a) != 0.0 || f2r(b) != 0.0) ? 32'h3f80_0000 : 32'd0;
      default: return FP32_QNAN;
    endcase
  endfunction

  function automatic logic [31:0] ref_otimes(input otimes_op_e op, input logic [15:0] a,
                                             input logic [15:0] b);
    logic [31:0] af, bf, d;
    af = h2f(a); bf = h2f(b);
    case (op)
      OT_MUL: return r2f(h2r(a) * h2r(b));
      OT_ADD: return r2f(h2r(a) + h2r(b));
      OT_MIN: return less(af, bf) ? af : bf;
      OT_MAX: return less(af, bf) ? bf : af;
      OT_AND: return (h2r(a) != 0.0 && h2r(b) != 0.0) ? 32'h3f80_0000 : 32'd0;
      OT_L2: begin
        d = r2f(h2r(a) - h2r(b));
        return r2f(f2r(d) * f2r(d));
      end
      default: return FP32_QNAN;
    endcase
  endfunction

  // SIMD^2 instruction semantics: (+) and (x) per opcode, from the instruction table.
  function automatic oplus_op_e ref_oplus_of(input simd2_opcode_e opc);
    case (opc)
      I_MMA, I_ADDNORM:                return OP_ADD;
      I_MINPLUS, I_MINMUL, I_MINMAX:   return OP_MIN;
      I_MAXPLUS, I_MAXMUL, I_MAXMIN:   return OP_MAX;
      I_ORAND:                         return OP_OR;
      default:                         return OP_ADD;
    endcase
  endfunction

  function automatic otimes_op_e ref_otimes_of(input simd2_opcode_e opc);
    case (opc)
      I_MMA, I_MINMUL, I_MAXMUL: return OT_MUL;
      I_MINPLUS, I_MAXPLUS:      return OT_ADD;
      I_MINMAX:                  return OT_MAX;
      I_MAXMIN:                  return OT_MIN;
      I_ORAND:                   return OT_AND;
      I_ADDNORM:                 return OT_L2;
      default:                   return OT_MUL;
    endcase
  endfunction

  // Random fp16 that is never NaN; about 1 in 16 is +-inf, 1 in 16 is +-0, some subnormal.
  function automatic logic [15:0] rand_h();
    logic [15:0] h;
    int unsigned sel;
    sel = $urandom_range(15);
    h = 16'($urandom);
    if (sel == 0) h[14:0] = 15'h7c00;                    // infinity
    else if (sel == 1) h[14:0] = 15'd0;                  // zero
    else if (sel == 2) h[14:10] = 5'd0;                  // subnormal
    else h[14:10] = 5'($urandom_range(30, 1));           // normal, any exponent
    return h;
  endfunction

  // Random finite fp16 in a moderate range (magnitude 2^-6 .. 2^6), for long accumulations.
  function automatic logic [15:0] rand_h_mod();
    logic [15:0] h;
    h = 16'($urandom);
    h[14:10] = 5'($urandom_range(21, 9));
    return h;
  endfunction

  // Random fp16 for array tests: finite moderate values, +inf about 1 in 16 (the "no edge"
  // value of path problems). No -inf, so no NaN arises that min/max would have to order.
  function automatic logic [15:0] rand_h_pinf();
    return ($urandom_range(15) == 0) ? 16'h7c00 : rand_h_mod();
  endfunction
endpackage
