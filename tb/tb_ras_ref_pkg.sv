// tb_ras_ref_pkg: reference models for the testbenches.
//
// Software models written from the algorithm, not from the RTL:
//   real_to_bf16   probability -> BF16 (truncating the fraction)
//   ref_freq       f = max(1, round(p * 2^16)) evaluated in real arithmetic
//   ref_build_cdf  conversion of a 256-entry distribution, mass correction
//                  onto the largest frequency, CDF C(0..256)
//   ref_encode     byte-wise rANS encoder (L = 2^23, n = 16)
//   ref_search     binary search for the symbol of a slot in [lo, hi] with
//                  the number of probes it takes
//   ref_predict    anchor of the prediction window for a pixel of a plane
package tb_ras_ref_pkg;

  localparam int unsigned N_BITS = 16;
  localparam longint unsigned RL = 64'h0080_0000;

  typedef int unsigned cdf_t [257];
  typedef logic [15:0] dist_t [256];

  function automatic logic [15:0] real_to_bf16(real p);
    int e;
    real m;
    if (p <= 0.0) return 16'h0000;
    e = 0;
    m = p;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    if (e + 127 <= 0) return 16'h0000;
    return {1'b0, 8'(e + 127), 7'($rtoi((m - 1.0) * 128.0))};
  endfunction

  // round(p * 2^16) before the clamp to [1, 65535]
  function automatic longint ref_round(logic [15:0] b);
    int e;
    real v;
    e = int'(b[14:7]);
    if (b[15] || e == 0) return 0;
    if (e == 255) return 65535;
    v = real'({1'b1, b[6:0]}) * (2.0 ** (e - 127 - 7)) * 65536.0;
    if (v >= 65535.0) return 65535;
    return longint'($floor(v + 0.5));
  endfunction

  function automatic int unsigned ref_freq(logic [15:0] b);
    longint r;
    r = ref_round(b);
    if (r >= 65535) return 65535;
    if (r < 1) return 1;
    return int'(r);
  endfunction

  function automatic void ref_build_cdf(input dist_t d, output cdf_t c, output int corr,
                                        output int clamps);
    int unsigned f [256];
    longint sum;
    int unsigned fmax;
    int imax;
    sum = 0; fmax = 0; imax = 0; clamps = 0;
    for (int i = 0; i < 256; i++) begin
      f[i] = ref_freq(d[i]);
      if (ref_round(d[i]) < 1) clamps++;
      sum += f[i];
      if (f[i] > fmax) begin fmax = f[i]; imax = i; end
    end
    corr = int'(65536 - sum);
    f[imax] = int'(fmax) + corr;
    c[0] = 0;
    for (int i = 0; i < 256; i++) c[i+1] = c[i] + f[i];
  endfunction

  // Encodes syms[0..n-1] in that order; bytes come out in push order.
  function automatic void ref_encode(input cdf_t c, input byte unsigned syms[$],
                                     output int unsigned state, output byte unsigned bytes[$]);
    longint unsigned x, f, xmax;
    bytes = {};
    x = RL;
    foreach (syms[i]) begin
      f = c[syms[i]+1] - c[syms[i]];
      xmax = ((RL >> N_BITS) << 8) * f;
      while (x >= xmax) begin
        bytes.push_back(byte'(x & 255));
        x = x >> 8;
      end
      x = ((x / f) << N_BITS) + (x % f) + c[syms[i]];
    end
    state = int'(x);
  endfunction

  // Largest x in [lo, hi] with C(x) <= slot, by bisection; counts probes.
  function automatic int ref_search(input cdf_t c, input int unsigned slot, input int lo,
                                    input int hi, output int probes);
    int mid;
    probes = 0;
    while (lo < hi) begin
      mid = (lo + hi + 1) / 2;
      probes++;
      if (c[mid] <= slot) lo = mid;
      else hi = mid - 1;
    end
    return lo;
  endfunction

  // Anchor for pixel (r, c) of a plane stored row-major with width w.
  function automatic int ref_predict(input byte unsigned img[$], input int w, input int r,
                                     input int cc);
    int s;
    if (r >= 2 && cc >= 2) begin
      s = 0;
      for (int dr = -2; dr <= 0; dr++)
        for (int dc = -2; dc <= 0; dc++)
          if (!(dr == 0 && dc == 0)) s += img[(r+dr)*w + cc + dc];
      return s / 8;
    end
    if (cc >= 1) return img[r*w + cc - 1];
    return 0;
  endfunction

  // Full prediction-guided decode of one symbol: returns the symbol and the
  // probes spent (window search, plus full search after a miss).
  function automatic int ref_decode_sym(input cdf_t c, input int unsigned slot, input int mu,
                                        output int probes, output bit hit);
    int lo, hi, x, p2;
    lo = (mu < 8) ? 0 : mu - 8;
    hi = (mu + 8 > 255) ? 255 : mu + 8;
    x = ref_search(c, slot, lo, hi, probes);
    hit = (c[x] <= slot) && (slot < c[x+1]);
    if (!hit) begin
      x = ref_search(c, slot, 0, 255, p2);
      probes += p2;
    end
    return x;
  endfunction

  // A test distribution: a discretised two-sided geometric bump around
  // `centre` with decay `a`, plus a floor `eps` for every symbol.
  function automatic void make_dist(input int centre, input real a, input real eps,
                                    output dist_t d);
    real w [256];
    real tot;
    tot = 0.0;
    for (int i = 0; i < 256; i++) begin
      w[i] = (a ** ((i > centre) ? i - centre : centre - i)) + eps;
      tot += w[i];
    end
    for (int i = 0; i < 256; i++) d[i] = real_to_bf16(w[i] / tot);
  endfunction

endpackage
