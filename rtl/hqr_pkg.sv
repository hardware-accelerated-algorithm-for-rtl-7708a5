// hqr_pkg: types, constants and arithmetic shared by the root-density plotter.
//
// The accelerator finds the roots of monic complex polynomials of degree up to
// N by running shifted QR iterations on the polynomial's companion matrix,
// which stays upper Hessenberg throughout. Every number is single precision
// (IEEE-754 binary32), as in the published design; a complex number is
// a pair of binary32 words.
//
// The package holds
//   * N, the largest polynomial degree (6, the configuration evaluated);
//   * cplx_t, a packed complex binary32 number;
//   * task_t, the token that travels round the PE loop: one matrix with the
//     progress of the QR algorithm on it (m, iter, row/col, matmul_mode), the
//     shift s of the running iteration and the Givens coefficients of the
//     left half-sweep, which the right half-sweep re-uses;
//   * combinational binary32 functions: add, multiply, reciprocal square root
//     and a floor-to-integer conversion, plus complex helpers.
//
// Arithmetic choices of this implementation (the published design only says "FP32"):
// subnormal inputs and results are flushed to zero, rounding is to nearest
// even, overflow gives infinity, NaN is not generated or propagated
// specially. fp_rsqrt is exact to within one unit in the last place.
package hqr_pkg;

  // Largest polynomial degree = largest matrix order.
  localparam int N      = 6;
  localparam int IDX_W  = 3;   // holds 0..N
  localparam int ITER_W = 8;   // QR iterations per size level, up to 256

  typedef logic [31:0] fp32_t;

  typedef struct packed {
    fp32_t re;
    fp32_t im;
  } cplx_t;

  // Direction of the running half-sweep (state variable of the scheduler).
  typedef enum logic {
    MM_LEFT  = 1'b0,   // A <- Q_r A   : rotate rows r-1, r
    MM_RIGHT = 1'b1    // A <- A Q_r^H : rotate columns r-1, r
  } mm_mode_e;

  typedef cplx_t [N-1:0][N-1:0] cmat_t;   // a[i][j], row i, column j
  typedef cplx_t [N-2:0]        crot_t;   // index r-1 for rotation r
  typedef cplx_t [N-1:0]        cvec_t;

  // One task in flight. valid=0 is a pipeline gap.
  typedef struct packed {
    logic             valid;
    logic             done;    // finished, waiting for room in the FIFO
    logic [IDX_W-1:0] deg;     // degree of the polynomial (2..N)
    logic [IDX_W-1:0] m;       // order of the active leading block
    logic [IDX_W-1:0] row;     // rotation of this pass works on (row,col),
    logic [IDX_W-1:0] col;     // (row-1,col); col = row-1
    mm_mode_e         mode;
    logic [ITER_W-1:0] iter;
    cplx_t            shift;   // s = a[m-1][m-1] taken at the iteration start
    crot_t            gc;      // Givens c of rotations 1..N-1
    crot_t            gs;      // Givens s of rotations 1..N-1
    cmat_t            a;
  } task_t;

  // Results of one polynomial: root k is eig[k], k < deg.
  typedef struct packed {
    logic [IDX_W-1:0] deg;
    cvec_t            eig;
  } result_t;

  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam cplx_t C_ZERO  = '{re: FP_ZERO, im: FP_ZERO};
  localparam cplx_t C_ONE   = '{re: FP_ONE,  im: FP_ZERO};

  // ---------------------------------------------------------------------
  // binary32 arithmetic
  // ---------------------------------------------------------------------

  function automatic fp32_t fp_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic logic fp_is_zero(fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  // Round a normalised 27-bit significand (bit 26 set; 3 guard/round/sticky
  // bits below the 24 kept) to nearest even and pack it. The functions below
  // are written with a single exit so that they map onto plain multiplexers.
  function automatic fp32_t fp_pack(logic s, logic signed [10:0] e, logic [26:0] v);
    logic [24:0]        mant;
    logic               up;
    logic signed [10:0] ee;
    fp32_t              r;
    up   = v[2] & (v[1] | v[0] | v[3]);
    mant = {1'b0, v[26:3]} + {24'd0, up};
    ee   = e;
    if (mant[24]) begin
      mant = mant >> 1;
      ee   = ee + 11'sd1;
    end
    if (ee <= 11'sd0)        r = {s, 31'd0};
    else if (ee >= 11'sd255) r = {s, 8'hFF, 23'd0};
    else                     r = {s, ee[7:0], mant[22:0]};
    return r;
  endfunction

  function automatic fp32_t fp_add(fp32_t a, fp32_t b);
    fp32_t              x, y, r;
    logic [26:0]        xa, xb, sh, diff;
    logic [27:0]        sum;
    logic [7:0]         d;
    logic [4:0]         lz;
    logic signed [10:0] e;
    if (b[30:0] > a[30:0]) begin x = b; y = a; end
    else                   begin x = a; y = b; end
    xa = {1'b1, x[22:0], 3'b000};
    xb = {1'b1, y[22:0], 3'b000};
    d  = x[30:23] - y[30:23];
    if (d >= 8'd27) sh = 27'd1;
    else begin
      sh = xb >> d;
      if ((xb & ((27'd1 << d) - 27'd1)) != 27'd0) sh[0] = 1'b1;
    end
    e    = {3'b000, x[30:23]};
    sum  = {1'b0, xa} + {1'b0, sh};
    diff = xa - sh;
    lz   = 5'd0;
    for (int i = 0; i <= 26; i++) if (diff[i]) lz = 5'(26 - i);
    if (fp_is_zero(x)) r = {a[31] & b[31], 31'd0};   // both zero
    else if (fp_is_zero(y)) r = x;
    else if (x[31] == y[31]) begin
      if (sum[27]) r = fp_pack(x[31], e + 11'sd1, {sum[27:2], sum[1] | sum[0]});
      else         r = fp_pack(x[31], e, sum[26:0]);
    end
    else if (diff == 27'd0) r = FP_ZERO;
    else r = fp_pack(x[31], e - 11'(lz), diff << lz);
    return r;
  endfunction

  function automatic fp32_t fp_sub(fp32_t a, fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp32_t fp_mul(fp32_t a, fp32_t b);
    logic               s;
    logic [47:0]        p;
    logic signed [10:0] e;
    fp32_t              r;
    s = a[31] ^ b[31];
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = 11'({3'b000, a[30:23]}) + 11'({3'b000, b[30:23]}) - 11'sd127;
    if (fp_is_zero(a) || fp_is_zero(b)) r = {s, 31'd0};
    else if (p[47]) r = fp_pack(s, e + 11'sd1, {p[47:22], |p[21:0]});
    else            r = fp_pack(s, e, {p[46:21], |p[20:0]});
    return r;
  endfunction

  // 1/sqrt(x) for x > 0. Returns +infinity for x == 0.
  // x = M' * 2^k with k even and M' in [1,4); with Mi = M' * 2^24,
  // 2^25/sqrt(M') = sqrt(2^74 / Mi), computed with an integer divide and an
  // integer square root.
  function automatic fp32_t fp_rsqrt(fp32_t x);
    logic signed [10:0] ue, k, re;
    logic [25:0]        mi;
    logic [74:0]        q;
    logic [49:0]        rem, trial, root;
    fp32_t              r;
    ue = 11'({3'b000, x[30:23]}) - 11'sd127;
    if (!ue[0]) begin
      k  = ue;
      mi = {2'b01, x[22:0], 1'b0};        // M' in [1,2)
    end else begin
      k  = ue - 11'sd1;
      mi = {1'b1, x[22:0], 2'b00};        // M' = 2M in [2,4)
    end
    q = (75'd1 << 74) / {49'd0, mi};
    // bit-serial integer square root of q (q < 2^50)
    rem  = q[49:0];
    root = '0;
    for (int i = 24; i >= 0; i--) begin
      trial = root | (50'd1 << (2 * i));
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root >> 1) | (50'd1 << (2 * i));
      end else begin
        root = root >> 1;
      end
    end
    // root = floor(2^25/sqrt(M')), in (2^24, 2^25]
    re = -(k >>> 1);
    if (fp_is_zero(x)) r = {1'b0, 8'hFF, 23'd0};
    else if (root[25]) r = {1'b0, 8'(re + 11'sd127), 23'd0};
    else r = fp_pack(1'b0, re + 11'sd126, {root[24:0], 2'b00} | 27'(rem != 50'd0));
    return r;
  endfunction

  // floor(x) for a coordinate: bit 16 is 0 when x < 0 or x >= 2^16.
  function automatic logic [16:0] fp_floor_u16(fp32_t x);
    logic [39:0] v;
    logic [16:0] r;
    logic [7:0]  ue;
    ue = x[30:23] - 8'd127;
    v  = {16'd0, 1'b1, x[22:0]} << ue[3:0];   // integer part in v[38:23]
    if (fp_is_zero(x))          r = 17'h1_0000;
    else if (x[31])             r = 17'd0;
    else if (x[30:23] < 8'd127) r = 17'h1_0000;
    else if (x[30:23] > 8'd142) r = 17'd0;
    else                        r = {1'b1, v[38:23]};
    return r;
  endfunction

  // ---------------------------------------------------------------------
  // complex helpers
  // ---------------------------------------------------------------------

  function automatic cplx_t c_add(cplx_t a, cplx_t b);
    return '{re: fp_add(a.re, b.re), im: fp_add(a.im, b.im)};
  endfunction

  function automatic cplx_t c_sub(cplx_t a, cplx_t b);
    return '{re: fp_sub(a.re, b.re), im: fp_sub(a.im, b.im)};
  endfunction

  function automatic cplx_t c_neg(cplx_t a);
    return '{re: fp_neg(a.re), im: fp_neg(a.im)};
  endfunction

  function automatic cplx_t c_conj(cplx_t a);
    return '{re: a.re, im: fp_neg(a.im)};
  endfunction

  function automatic cplx_t c_mul(cplx_t a, cplx_t b);
    return '{re: fp_sub(fp_mul(a.re, b.re), fp_mul(a.im, b.im)),
             im: fp_add(fp_mul(a.re, b.im), fp_mul(a.im, b.re))};
  endfunction

  function automatic cplx_t c_scale(fp32_t r, cplx_t a);
    return '{re: fp_mul(r, a.re), im: fp_mul(r, a.im)};
  endfunction

  // |a|^2
  function automatic fp32_t c_abs2(cplx_t a);
    return fp_add(fp_mul(a.re, a.re), fp_mul(a.im, a.im));
  endfunction

endpackage
