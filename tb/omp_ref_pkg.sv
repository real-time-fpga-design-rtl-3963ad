// omp_ref_pkg: reference model of block-wise OMP reconstruction, for the testbenches.
//
// It builds the (V-free) sensing matrix A' = A/V explicitly, A'(0,0)=2, A'(i,0)=1 and
// A'(i,i)=1 for 0 < i < M, and runs OMP with plain loops over it: correlation, argmax,
// the least-squares solve through the explicit inverse of the arrow matrix A_S'^T A_S',
// the matrix-vector product A_S' theta, and the residual. Fixed point (FRAC fractional
// bits, inverse entry round(2^FRAC/s), round-half-up shifts) is modelled bit-exactly,
// so the RTL must match it exactly. Sizes are the default N = 64, M = 16, K = 8.
package omp_ref_pkg;

  localparam int N    = 64;
  localparam int M    = 16;
  localparam int K    = 8;
  localparam int FRAC = 11;

  typedef int          pix_t   [N];
  typedef int          yvec_t  [M];
  typedef longint      lvec_t  [M];
  typedef int          xvec_t  [N];

  typedef struct {
    lvec_t theta;      // V-scaled transform-domain estimate, integers
    bit    sup [M];    // index set
    int    order [K];  // columns in the order chosen, order[0] = 0
    int    n_iter;
    bit    zero_quit;  // stopped because the residual was zero
    xvec_t x_hat;
  } result_t;

  // Natural-order Walsh-Hadamard entry, +1 or -1.
  function automatic int wh(int r, int c);
    int p;
    p = 0;
    for (int b = 0; b < 16; b++) p ^= ((r >> b) & (c >> b) & 1);
    return p ? -1 : 1;
  endfunction

  // Measurements with the 0/1 Hadamard measurement matrix, row i = (1 + H(i,:))/2.
  function automatic yvec_t measure(pix_t x);
    yvec_t y;
    for (int i = 0; i < M; i++) begin
      y[i] = 0;
      for (int n = 0; n < N; n++) if (wh(i, n) == 1) y[i] += x[n];
    end
    return y;
  endfunction

  function automatic int ap(int i, int j);   // A/V
    if (i == 0 && j == 0) return 2;
    if (j == 0) return 1;
    if (i == j) return 1;
    return 0;
  endfunction

  function automatic longint rnd(longint v);  // drop FRAC bits, round half up
    return (v + (64'sd1 <<< (FRAC - 1))) >>> FRAC;
  endfunction

  typedef struct {
    lvec_t theta;    // V-scaled estimate, integer (rounded)
    lvec_t r;        // residual, integer (rounded)
    bit    zero;     // every residual element is zero
    bit    finish;   // zero, or the index set holds K columns
  } lsp_t;

  // One least-squares step for index set sup (column 0 always in it).
  function automatic lsp_t lsp(yvec_t y, bit sup [M]);
    lsp_t   o;
    int     cols [M];
    int     t = 0;
    longint b [M], th [M];
    longint lut, u, r_fx;
    for (int j = 0; j < M; j++) if (sup[j]) begin cols[t] = j; t++; end
    // b = A_S'^T y
    for (int c = 0; c < t; c++) begin
      b[c] = 0;
      for (int i = 0; i < M; i++) b[c] += longint'(ap(i, cols[c])) * y[i];
    end
    // theta = (A_S'^T A_S')^-1 b. The inverse of [[M+3, 1..],[1, I]] is
    // [[1/s, -1/s..],[-1/s, I + 1/s]] with s = M+3-(t-1); 1/s is held in fixed point.
    lut = ((64'sd1 <<< FRAC) + (M + 3 - (t - 1)) / 2) / (M + 3 - (t - 1));
    u = b[0];
    for (int c = 1; c < t; c++) u -= b[c];
    u = u * lut;
    th[0] = u;
    for (int c = 1; c < t; c++) th[c] = (b[c] <<< FRAC) - u;
    // residual = (y << FRAC) - A_S' theta
    o.zero = 1;
    for (int i = 0; i < M; i++) begin
      r_fx = longint'(y[i]) <<< FRAC;
      for (int c = 0; c < t; c++) r_fx -= ap(i, cols[c]) * th[c];
      o.r[i] = rnd(r_fx);
      if (o.r[i] != 0) o.zero = 0;
      o.theta[i] = 0;
    end
    for (int c = 0; c < t; c++) o.theta[cols[c]] = rnd(th[c]);
    o.finish = o.zero || (t == K);
    return o;
  endfunction

  function automatic result_t omp(yvec_t y);
    result_t res;
    lsp_t    o;
    int      t;
    for (int i = 0; i < M; i++) res.sup[i] = (i == 0);
    for (int i = 0; i < K; i++) res.order[i] = 0;
    t = 1;
    forever begin
      o = lsp(y, res.sup);
      if (o.finish) break;
      // correlation A'^T r with the unchosen columns 1..M-1, argmax of the magnitude
      begin
        int     best;
        longint bv, cv;
        best = -1;
        bv = -1;
        for (int j = 1; j < M; j++) begin
          if (res.sup[j]) continue;
          cv = 0;
          for (int i = 0; i < M; i++) cv += ap(i, j) * o.r[i];
          if (cv < 0) cv = -cv;
          if (cv > bv) begin bv = cv; best = j; end
        end
        res.sup[best] = 1;
        res.order[t] = best;
        t++;
      end
    end
    res.theta     = o.theta;
    res.n_iter    = t;
    res.zero_quit = o.zero;
    for (int n = 0; n < N; n++) begin
      longint acc;
      acc = 0;
      for (int j = 0; j < M; j++) acc += wh(n, j) * res.theta[j];
      res.x_hat[n] = int'((acc + (N / 4)) >>> ($clog2(N) - 1));
    end
    return res;
  endfunction

  // A test image block: a smooth ramp plus texture of the given strength, 8-bit samples.
  function automatic pix_t make_block(int kind, int strength);
    pix_t x;
    for (int n = 0; n < N; n++) begin
      int v;
      case (kind)
        0: v = 0;                                            // black
        1: v = strength;                                     // flat
        default: v = 40 + 12 * (n % 8) + 9 * (n / 8)
                     + int'($urandom_range(0, 2 * strength)) - strength;
      endcase
      x[n] = v < 0 ? 0 : (v > 255 ? 255 : v);
    end
    return x;
  endfunction

endpackage
