// polar_ref_pkg -- bit-exact software model of the fixed-point SC decoder,
// used by the testbenches as the independent reference.
//
// Written directly from the algorithm, without the hardware's memory map or
// schedule: LLRs of every tree level are kept in one array in heap order
// (level l, 2^l values, at offset 2^l; the channel at offset N), bits are
// decided in index order, and the partial sums of every g node are obtained by
// re-encoding the already decided bits of the left sub-block. Fixed-point
// rules: f and g results saturate to [-(2^(Q-1)-1), 2^(Q-1)-1]; a bit is 1 when
// its LLR is negative; frozen bits are 0.
package polar_ref_pkg;

  function automatic int ref_f(int a, int b, int q);
    int maxv = (1 << (q - 1)) - 1;
    int ma = (a < 0) ? -a : a;
    int mb = (b < 0) ? -b : b;
    int m = (ma < mb) ? ma : mb;
    if (m > maxv) m = maxv;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic int ref_g(bit s, int a, int b, int q);
    int maxv = (1 << (q - 1)) - 1;
    int r = s ? b - a : b + a;
    if (r > maxv) r = maxv;
    if (r < -maxv) r = -maxv;
    return r;
  endfunction

  // x = u F^{(x)n} with F = [1 0; 1 1], natural order: for a block of length
  // 2h, x[j] = (uL xor uR)-encoded, x[j+h] = uR-encoded.
  function automatic void polar_encode(ref bit v[], input int len);
    for (int s = 1; s < len; s *= 2)
      for (int b0 = 0; b0 < len; b0 += 2 * s)
        for (int j = b0; j < b0 + s; j++) v[j] = v[j] ^ v[j + s];
  endfunction

  // Polarization-weight frozen set: u_i frozen when
  // sum over set bits j of i of round(2^(j/4) * 4096) is below t.
  function automatic bit is_frozen(int i, int t);
    longint acc = 0;
    for (int j = 0; j < 31; j++)
      if ((i >> j) & 1) acc += longint'($rtoi(2.0 ** (real'(j) / 4.0) * 4096.0 + 0.5));
    return acc < t;
  endfunction

  // SC decoding of one frame of integer channel LLRs.
  function automatic void sc_decode(input int n, input int q, input int w,
                                    ref int ch[], ref bit u[]);
    int nn = 1 << n;
    int L[];
    bit ps[];
    L = new[2 * nn];
    for (int j = 0; j < nn; j++) L[nn + j] = ch[j];
    for (int i = 0; i < nn; i++) begin
      for (int l = n; l >= 1; l--) begin
        int h = 1 << (l - 1);
        int r = i % (1 << l);
        if (r == 0) begin
          for (int j = 0; j < h; j++) L[h + j] = ref_f(L[2 * h + j], L[3 * h + j], q);
        end else if (r == h) begin
          ps = new[h];
          for (int j = 0; j < h; j++) ps[j] = u[i - h + j];
          polar_encode(ps, h);
          for (int j = 0; j < h; j++) L[h + j] = ref_g(ps[j], L[2 * h + j], L[3 * h + j], q);
        end
      end
      u[i] = is_frozen(i, w) ? 1'b0 : (L[1] < 0);
    end
  endfunction

  // Noisy BPSK channel, LLR = amp * (1 - 2x) + noise, noise roughly Gaussian
  // (sum of four uniform variables) of spread `noise`, saturated to qc bits.
  function automatic int channel_llr(bit x, int amp, int noise, int qc);
    int v = x ? -amp : amp;
    int lo = -(1 << (qc - 1));
    int hi = (1 << (qc - 1)) - 1;
    if (noise > 0)
      for (int k = 0; k < 4; k++) v += int'($urandom_range(2 * noise)) - noise;
    if (v > hi) v = hi;
    if (v < lo) v = lo;
    return v;
  endfunction

endpackage
