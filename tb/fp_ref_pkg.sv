// fp_ref_pkg: reference arithmetic for the testbenches.
//
// Models the engine's number formats with plain integer arithmetic, written
// independently of the RTL: the normalizer is modelled by the position of the
// leading one rather than by OR trees and multiplexers, the rounding by
// integer division of the significand. Also counts how often each
// normalization case (no shift, shift k, shift k+lambda, carry) occurs, and
// provides random operand generators and conversions to real numbers.
package fp_ref_pkg;

  // statistics of the normalization cases seen by the model
  int unsigned n_none, n_k, n_kl, n_ovf, n_flush;

  function automatic void clear_stats();
    n_none = 0; n_k = 0; n_kl = 0; n_ovf = 0; n_flush = 0;
  endfunction

  // position of the leading one, -1 for zero
  function automatic int lead_pos(longint unsigned v, int width);
    int p = -1;
    for (int i = 0; i < width; i++) if ((v >> i) & 1) p = i;
    return p;
  endfunction

  // Adds two signed magnitudes, exponent ex/ey, 16-bit significands, with
  // alignment truncation and approximate normalization. Returns the 25-bit
  // extended word {sign, exp[7:0], sig[15:0]}.
  function automatic logic [24:0] add_core(bit sx, int ex, int unsigned mx,
                                           bit sy, int ey, int unsigned my,
                                           bit x_zero, int k, int l);
    int emax, d, sh, p, e;
    int unsigned ax, ay, s, sig;
    longint unsigned t;
    bit sgn;
    if (x_zero) begin
      emax = ey; ax = 0; ay = my;
    end else if (ex >= ey) begin
      emax = ex; d = ex - ey; ax = mx; ay = (d >= 16) ? 0 : (my >> d);
    end else begin
      emax = ey; d = ey - ex; ay = my; ax = (d >= 16) ? 0 : (mx >> d);
    end
    if (sx == sy)      begin s = ax + ay; sgn = sx; end
    else if (ax >= ay) begin s = ax - ay; sgn = sx; end
    else               begin s = ay - ax; sgn = sy; end
    p = lead_pos(s, 17);
    if (p >= 16 - k)          begin sh = 0;     n_none++; end
    else if (p >= 16 - k - l) begin sh = k;     n_k++;    end
    else                      begin sh = k + l; n_kl++;   end
    t = (longint'(s) << sh) & 64'h1FFFF;
    if (t >> 16) begin sig = t >> 1; e = emax + 1; n_ovf++; end
    else         begin sig = t & 16'hFFFF; e = emax - sh; end
    if (e <= 0) begin n_flush++; return 25'd0; end
    if (e >= 255) return {sgn, 8'hFF, 16'h8000};
    return {sgn, 8'(e), 16'(sig)};
  endfunction

  // res = a*b + c  (a, b BF16; c extended)
  function automatic logic [24:0] ref_fma(logic [15:0] a, logic [15:0] b,
                                          logic [24:0] c, int k, int l);
    int ea = a[14:7], eb = b[14:7];
    bit pz = (ea == 0) || (eb == 0);
    int unsigned prod = pz ? 0 : (int'({1'b1, a[6:0]}) * int'({1'b1, b[6:0]}));
    return add_core(a[15] ^ b[15], ea + eb - 126, prod,
                    c[24], int'(c[23:16]), c[15:0], pz, k, l);
  endfunction

  // acc + x, both extended (x plays the role of the product)
  function automatic logic [24:0] ref_add_ext(logic [24:0] x, logic [24:0] acc,
                                              int k, int l);
    return add_core(x[24], int'(x[23:16]), x[15:0],
                    acc[24], int'(acc[23:16]), acc[15:0], 1'b0, k, l);
  endfunction

  // extended -> BF16, round to nearest even
  function automatic logic [15:0] ref_round(logic [24:0] x);
    int unsigned sig = x[15:0], q, r;
    int e = x[23:16], p;
    if (e == 255) return {x[24], 8'hFF, 7'd0};
    if (sig == 0 || e == 0) return {x[24], 15'd0};
    p = lead_pos(sig, 16);
    sig = sig << (15 - p);
    e = e - (15 - p);
    q = sig / 256;  r = sig % 256;
    if (r > 128 || (r == 128 && (q % 2 == 1))) q++;
    if (q == 256) begin q = 128; e++; end
    if (e <= 0) return {x[24], 15'd0};
    if (e >= 255) return {x[24], 8'hFF, 7'd0};
    return {x[24], 8'(e), 7'(q & 127)};
  endfunction

  // 2^e for a real result
  function automatic real pow2(int e);
    real f = 1.0;
    for (int i = 0; i < e; i++) f = f * 2.0;
    for (int i = 0; i > e; i--) f = f / 2.0;
    return f;
  endfunction

  function automatic real bf16_to_real(logic [15:0] v);
    real m;
    if (v[14:7] == 0) return 0.0;
    m = (128.0 + real'(v[6:0])) / 128.0 * pow2(int'(v[14:7]) - 127);
    return v[15] ? -m : m;
  endfunction

  function automatic real ext_to_real(logic [24:0] v);
    real m;
    m = real'(v[15:0]) / 32768.0 * pow2(int'(v[23:16]) - 127);
    return v[24] ? -m : m;
  endfunction

  // random BF16 with exponent near 127; zero with probability 1/zero_in
  function automatic logic [15:0] rand_bf16(int spread, int zero_in);
    if (zero_in > 0 && ($urandom % zero_in) == 0) return 16'h0000;
    return {1'($urandom), 8'(127 - spread + ($urandom % (2 * spread + 1))),
            7'($urandom)};
  endfunction

  // random extended operand; a few leading zeros now and then
  function automatic logic [24:0] rand_ext(int spread);
    logic [15:0] s = 16'($urandom) | 16'h8000;
    s = s >> ($urandom % 4 == 0 ? $urandom % 4 : 0);
    return {1'($urandom), 8'(127 - spread + ($urandom % (2 * spread + 1))), s};
  endfunction

endpackage
