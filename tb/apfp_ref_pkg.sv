// apfp_ref_pkg -- reference model of the packed APFP arithmetic for the
// testbenches, written independently of the RTL pipelines.
//
// apfp_ref#(BITS)::mul and ::add compute the round-toward-zero results the
// way a textbook would: mul forms the full 2M-bit product and keeps its top
// M bits; add places both operands on a common integer grid wide enough to
// hold the exact sum, finds its leading one and keeps the M bits below it.
// When the exponents differ by more than M+4 the smaller operand cannot
// reach the kept bits, and the answer is the larger operand (same signs) or
// the larger operand minus one unit in its last place (different signs).
// rnd() produces random normalised numbers with a few special cases.
package apfp_ref_pkg;

  class apfp_ref #(parameter int BITS = 128);
    localparam int E = 63;
    localparam int M = BITS - 1 - E;
    localparam int W = 2 * M + 8;

    static function logic [BITS-1:0] pack(logic s, logic signed [E-1:0] e, logic [M-1:0] m);
      return {s, e, m};
    endfunction

    static function logic [M-1:0] mant(logic [BITS-1:0] x);
      return x[M-1:0];
    endfunction

    static function logic signed [E-1:0] expo(logic [BITS-1:0] x);
      return x[M +: E];
    endfunction

    static function logic [BITS-1:0] mul(logic [BITS-1:0] a, logic [BITS-1:0] b);
      logic [2*M-1:0] p;
      logic s;
      s = a[BITS-1] ^ b[BITS-1];
      if (mant(a) == 0 || mant(b) == 0) return pack(s, '0, '0);
      p = {{M{1'b0}}, mant(a)} * {{M{1'b0}}, mant(b)};
      if (p[2*M-1]) return pack(s, expo(a) + expo(b), p[2*M-1:M]);
      return pack(s, expo(a) + expo(b) - 1, p[2*M-2:M-1]);
    endfunction

    static function logic [BITS-1:0] add(logic [BITS-1:0] a, logic [BITS-1:0] b);
      logic [BITS-1:0] x, y;
      logic signed [E+1:0] d;
      logic [W-1:0] xs, ys, s;
      int p;
      logic signed [E+1:0] ex;
      if (mant(a) == 0 && mant(b) == 0) return pack(a[BITS-1] & b[BITS-1], '0, '0);
      if (mant(b) == 0) return a;
      if (mant(a) == 0) return b;
      // x: larger magnitude
      if (expo(a) > expo(b) || (expo(a) == expo(b) && mant(a) >= mant(b))) begin
        x = a; y = b;
      end else begin
        x = b; y = a;
      end
      d = (E+2)'(expo(x)) - (E+2)'(expo(y));
      if (d > M + 4) begin
        if (x[BITS-1] == y[BITS-1]) return x;
        if (mant(x) == {1'b1, {(M-1){1'b0}}}) return pack(x[BITS-1], expo(x) - 1, '1);
        return pack(x[BITS-1], expo(x), mant(x) - 1);
      end
      xs = W'(mant(x)) << d;
      ys = W'(mant(y));
      s  = (x[BITS-1] == y[BITS-1]) ? xs + ys : xs - ys;
      if (s == 0) return pack(1'b0, '0, '0);
      p = 0;
      for (int i = 0; i < W; i++) if (s[i]) p = i;
      // value = s * 2^(ey - M); kept mantissa = top M bits below the leading one
      ex = (E+2)'(expo(y)) - M + p + 1;
      if (p + 1 >= M) s = s >> (p + 1 - M);
      else            s = s << (M - p - 1);
      return pack(x[BITS-1], E'(ex), s[M-1:0]);
    endfunction

    static function logic [BITS-1:0] rnd_mant_num(int exp_range);
      logic [M-1:0] m;
      for (int i = 0; i < M; i += 32) m = (m << 32) | M'($urandom);
      m[M-1] = 1'b1;
      case ($urandom % 6)
        0: m[M-2:0] = '0;                                     // power of two
        1: m[M-2:0] = '1;                                     // all ones
        default: ;
      endcase
      return pack($urandom % 2, E'($signed(32'($urandom % (2*exp_range+1))) - exp_range), m);
    endfunction

    // Random number; sometimes zero, sometimes a near copy of ref_v so that
    // a subtraction cancels many leading bits.
    static function logic [BITS-1:0] rnd(logic [BITS-1:0] ref_v, int exp_range);
      logic [BITS-1:0] v;
      int r;
      r = $urandom % 16;
      if (r == 0) return pack($urandom % 2, E'($urandom % 5), '0);
      if (r == 1) return {~ref_v[BITS-1], ref_v[BITS-2:0]};          // exact cancel
      if (r == 2 || r == 3) begin                                      // near cancel
        v = {~ref_v[BITS-1], ref_v[BITS-2:0]};
        v[($urandom % M)] ^= 1'b1;
        v[M-1] = (ref_v[M-1:0] == 0) ? 1'b1 : ref_v[M-1];
        if (v[M-1:0] == 0) v[M-1] = 1'b1;
        return v;
      end
      if (r == 4) begin                                                // exponent off by one
        v = rnd_mant_num(exp_range);
        v[M +: E] = ref_v[M +: E] - 1;
        v[BITS-1] = ~ref_v[BITS-1];
        return v;
      end
      if (r == 5 || r == 6) return rnd_mant_num(exp_range * 20);      // far apart
      return rnd_mant_num(exp_range);
    endfunction
  endclass

endpackage
