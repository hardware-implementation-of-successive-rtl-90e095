// tb_sc_ref_pkg: reference models for the SC decoder testbenches.
//
// Written from the decoding equations, not from the RTL structure:
//  * ref_f / ref_g evaluate min-sum f and g with integer arithmetic on
//    sign-magnitude words and convert back (g saturates at +-(2^(Q-1)-1); an
//    exact zero keeps the sign of Lb, the tie rule of the PE);
//  * polar_encode is the transform x = u B F^(x)m, done as an in-place
//    butterfly followed by a bit-reversal permutation;
//  * ref_decode is a plain successive-cancellation decoder that, for every
//    bit, walks from the channel down to the leaf, halving the vector at each
//    level with f (left half) or g (right half, partial sums re-encoded from
//    the bits already decided). It keeps no state between bits.
package tb_sc_ref_pkg;

  typedef logic [7:0] llr_t;  // Q <= 8, sign in bit Q-1

  function automatic int sm2int(input llr_t x, input int q);
    int mag;
    mag = int'(x) & ((1 << (q - 1)) - 1);
    return x[q-1] ? -mag : mag;
  endfunction

  function automatic llr_t int2sm(input int v, input bit neg, input int q);
    llr_t r;
    int mag;
    mag = (v < 0) ? -v : v;
    r = llr_t'(mag);
    r[q-1] = neg;
    return r;
  endfunction

  function automatic llr_t ref_f(input llr_t a, input llr_t b, input int q);
    int ma, mb;
    ma = sm2int(a, q); if (ma < 0) ma = -ma;
    mb = sm2int(b, q); if (mb < 0) mb = -mb;
    return int2sm((ma < mb) ? ma : mb, a[q-1] ^ b[q-1], q);
  endfunction

  // g_sat reports whether the exact sum had to be saturated.
  function automatic llr_t ref_g_sat(input llr_t a, input llr_t b, input bit us, input int q,
                                     output bit g_sat);
    int va, vb, v, vmax;
    bit neg;
    vmax = (1 << (q - 1)) - 1;
    va = sm2int(a, q);
    vb = sm2int(b, q);
    v  = (us ? -va : va) + vb;
    g_sat = (v > vmax) || (v < -vmax);
    if (v > vmax)  v = vmax;
    if (v < -vmax) v = -vmax;
    if (v < 0)      neg = 1'b1;
    else if (v > 0) neg = 1'b0;
    else            neg = b[q-1];
    return int2sm(v, neg, q);
  endfunction

  function automatic llr_t ref_g(input llr_t a, input llr_t b, input bit us, input int q);
    bit unused_sat;
    return ref_g_sat(a, b, us, q, unused_sat);
  endfunction

  function automatic int unsigned bitrev(input int unsigned x, input int unsigned w);
    int unsigned r;
    r = 0;
    for (int unsigned k = 0; k < w; k++) r = (r << 1) | ((x >> k) & 1);
    return r;
  endfunction

  function automatic int unsigned log2i(input int unsigned n);
    int unsigned m;
    m = 0;
    while ((1 << m) < n) m++;
    return m;
  endfunction

  // x = u G with G = B F^(x)m: x_std[c] = XOR of u[r] over r containing c,
  // then x[p] = x_std[bitrev(p)].
  function automatic void polar_encode(input bit u[], output bit x[]);
    int unsigned n, m;
    bit xs[];
    n = u.size();
    m = log2i(n);
    xs = u;
    for (int unsigned s = 1; s < n; s <<= 1)
      for (int unsigned j = 0; j < n; j++)
        if ((j & s) == 0) xs[j] ^= xs[j | s];
    x = new[n];
    for (int unsigned p = 0; p < n; p++) x[p] = xs[bitrev(p, m)];
  endfunction

  // nsat returns how many g evaluations saturated.
  function automatic void ref_decode(input llr_t ch[], input bit frz[], input int q,
                                     output bit u[], output int nsat);
    int unsigned n;
    llr_t cur[], nxt[];
    bit blk[], v[];
    n = ch.size();
    u = new[n];
    nsat = 0;
    for (int unsigned i = 0; i < n; i++) begin
      int unsigned base, len, half;
      cur  = ch;
      base = 0;
      len  = n;
      while (len > 1) begin
        half = len / 2;
        nxt  = new[half];
        if (i - base < half) begin
          for (int unsigned k = 0; k < half; k++) nxt[k] = ref_f(cur[2*k], cur[2*k+1], q);
        end else begin
          blk = new[half];
          for (int unsigned k = 0; k < half; k++) blk[k] = u[base + k];
          polar_encode(blk, v);
          for (int unsigned k = 0; k < half; k++) begin
            bit sat;
            nxt[k] = ref_g_sat(cur[2*k], cur[2*k+1], v[k], q, sat);
            nsat += int'(sat);
          end
          base += half;
        end
        cur = nxt;
        len = half;
      end
      u[i] = frz[i] ? 1'b0 : cur[0][q-1];
    end
  endfunction

  // Frozen set of the Bhattacharyya construction (BPSK/AWGN, design Eb/N0 in
  // dB): z0 = exp(-R Eb/N0); index bits from the MSB down, 0 -> 2z - z^2,
  // 1 -> z^2; the k indices of smallest z (lower index first on ties) are
  // information bits. Ranked by direct counting.
  function automatic void ref_frozen(input int n, input int k, input real ebn0_db, output bit frz[]);
    real z[];
    int m;
    m = int'(log2i(n));
    z = new[n];
    frz = new[n];
    for (int i = 0; i < n; i++) begin
      z[i] = $exp(-(real'(k) / real'(n)) * (10.0 ** (ebn0_db / 10.0)));
      for (int b = m - 1; b >= 0; b--)
        z[i] = ((i >> b) % 2 == 1) ? z[i] * z[i] : 2.0 * z[i] - z[i] * z[i];
    end
    for (int i = 0; i < n; i++) begin
      int rank;
      rank = 0;
      for (int j = 0; j < n; j++) if (z[j] < z[i] || (z[j] == z[i] && j < i)) rank++;
      frz[i] = (rank >= k);
    end
  endfunction

  // Standard normal sample (Box-Muller on two uniform draws).
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK (bit 0 -> +1) over AWGN with noise deviation sigma, received sample
  // clipped at +-3 sigma (the saturation level used in the fixed-point study)
  // and quantised uniformly to q-bit sign-magnitude.
  function automatic llr_t channel_sample(input bit x, input real sigma, input int q);
    real y, sat, step;
    int mag, vmax;
    vmax = (1 << (q - 1)) - 1;
    y = (x ? -1.0 : 1.0) + sigma * gauss();
    sat = 3.0 * sigma;
    if (y > sat)  y = sat;
    if (y < -sat) y = -sat;
    step = sat / real'(vmax);
    mag = int'((y < 0 ? -y : y) / step);
    if (mag > vmax) mag = vmax;
    return int2sm(mag, y < 0, q);
  endfunction

endpackage
