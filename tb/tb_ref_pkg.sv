// tb_ref_pkg: reference models used by the testbenches.
//
// Written from the design's specification, not from the RTL: the Galois
// LFSR step, the arbiter PUF delay model (same hash-based stand-in for
// process variation the behavioural APUF documents), and the Cover /
// Uncover function as the paper's pointer-walking procedure with queues.
// Vectors are held in fixed 256-bit containers with an explicit length;
// bit 1 of a paper vector is bit len-1 of the container.
package tb_ref_pkg;

  typedef logic [255:0] vec_t;

  function automatic vec_t lfsr_step(vec_t s, vec_t poly, int n);
    vec_t r;
    r = s >> 1;
    if (s[0]) r = r ^ poly;
    for (int i = n; i < 256; i++) r[i] = 1'b0;
    return r;
  endfunction

  function automatic vec_t lfsr_steps(vec_t s, vec_t poly, int n, int count);
    for (int i = 0; i < count; i++) s = lfsr_step(s, poly, n);
    return s;
  endfunction

  function automatic int unsigned mix(int unsigned seed, int unsigned idx);
    int unsigned h;
    h = (seed * 32'h9E37_79B9) ^ (idx * 32'h85EB_CA6B) ^ 32'h5BD1_E995;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  function automatic int pdl(int unsigned seed, int unsigned idx);
    return 1000 + int'(mix(seed, idx) % 64);
  endfunction

  // Upper minus lower path delay; response is 1 when this is negative.
  function automatic int apuf_delta(int unsigned seed, int bias, vec_t c, int n,
                                    logic [31:0] tu, logic [31:0] td, int k,
                                    int tune_step);
    int d;
    d = bias;
    for (int i = 1; i <= n; i++) begin
      if (c[n-i]) d += pdl(seed, 4*(i-1) + 1) - pdl(seed, 4*(i-1) + 3);
      else        d += pdl(seed, 4*(i-1))     - pdl(seed, 4*(i-1) + 2);
    end
    for (int j = 0; j < k; j++) begin
      d += pdl(seed, 4*n + 2*j) - pdl(seed, 4*n + 2*j + 1);
      if (tu[j]) d += tune_step;
      if (td[j]) d -= tune_step;
    end
    return d;
  endfunction

  // Paper bit i (1-based) of an len-bit vector.
  function automatic logic pb(vec_t v, int len, int i);
    return v[len-i];
  endfunction

  // Per(X, Y) by walking the pointers as the paper describes.
  function automatic vec_t per(vec_t x, vec_t y, int l);
    logic q[$];
    vec_t z;
    for (int i = 1; i <= l; i++) if (pb(y, l, i)) q.push_back(pb(x, l, i));
    for (int i = l; i >= 1; i--) if (!pb(y, l, i)) q.push_back(pb(x, l, i));
    z = '0;
    for (int i = 1; i <= l; i++) z[l-i] = q[i-1];
    return z;
  endfunction

  function automatic vec_t swap_pairs(vec_t y, int l);
    vec_t s;
    s = '0;
    for (int g = 0; g < l/2; g++) begin
      s[l-1-2*g]     = y[l-2-2*g];
      s[l-2-2*g]     = y[l-1-2*g];
    end
    return s;
  endfunction

  function automatic vec_t fill(vec_t w, vec_t f, vec_t mask, int l, int t);
    logic qw[$], qf[$];
    vec_t o;
    for (int i = 1; i <= l; i++) qw.push_back(pb(w, l, i));
    for (int i = 1; i <= t; i++) qf.push_back(pb(f, t, i));
    o = '0;
    for (int j = 1; j <= l + t; j++)
      o[l+t-j] = pb(mask, l+t, j) ? qf.pop_front() : qw.pop_front();
    return o;
  endfunction

  function automatic vec_t cover_ref(vec_t x, vec_t y, vec_t f, vec_t mask, int l, int t);
    return fill(per(x, y, l) ^ swap_pairs(y, l), f, mask, l, t);
  endfunction

  // A random (l+t)-bit mask with exactly t ones.
  function automatic vec_t rand_mask(int l, int t);
    vec_t m;
    int placed, p;
    m = '0;
    placed = 0;
    while (placed < t) begin
      p = int'($urandom_range(l + t - 1, 0));
      if (!m[p]) begin
        m[p] = 1'b1;
        placed++;
      end
    end
    return m;
  endfunction

  function automatic vec_t rand_vec(int len);
    vec_t v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    for (int i = len; i < 256; i++) v[i] = 1'b0;
    return v;
  endfunction

endpackage
