// Shared types and constants of the multi-bit TFHE bootstrapping accelerator.
//
// Two number formats flow through the design. Torus values (LWE and GLWE
// ciphertext elements) are 64-bit unsigned integers read modulo 2^64. Values in
// the Fourier domain are complex numbers whose real and imaginary parts are
// 48-bit two's-complement fixed-point numbers. The 64-bit torus and the 48-bit
// complex width follow the paper's numeric choices; the remaining constants are
// defaults of this implementation and are overridden through module parameters.
// Lint note: cshr keeps one guard bit for the rounding sum; the guard bit of
// the shifted result is dropped on purpose because a right shift by s >= 1
// always fits the 48-bit format again.
package taurus_pkg;

  localparam int TORUS_W = 64;   // torus modulus 2^64
  localparam int CPLX_W  = 48;   // fixed-point width of each complex component

  typedef logic [TORUS_W-1:0] torus_t;

  typedef struct packed {
    logic signed [CPLX_W-1:0] re;
    logic signed [CPLX_W-1:0] im;
  } cplx_t;

  // Fixed-point scale of the twiddle factors: |w| = 1.0 is stored as 2^TW_FRAC.
  localparam int TW_FRAC = 46;

  // Operation codes of the LWE processing unit.
  typedef enum logic [2:0] {
    LPU_ADD     = 3'd0,   // out = a + b            (homomorphic addition)
    LPU_SUB     = 3'd1,   // out = a - b
    LPU_MULC    = 3'd2,   // out = a * scalar       (plaintext multiplication)
    LPU_MODSW   = 3'd3,   // out = round(a * 2N / 2^64)   (modulus switch)
    LPU_KS      = 3'd4    // acc -= digit * ksk      (key-switching MAC)
  } lpu_op_e;

  // Complex multiplication with rounding of the product back to CPLX_W bits.
  // The product is shifted right by FRAC bits with round-half-up.
  function automatic cplx_t cmul(cplx_t a, cplx_t b, int frac);
    logic signed [2*CPLX_W+1:0] rr, ii, ri, ir, re, im;
    cplx_t r;
    rr = (2*CPLX_W+2)'(a.re) * (2*CPLX_W+2)'(b.re);
    ii = (2*CPLX_W+2)'(a.im) * (2*CPLX_W+2)'(b.im);
    ri = (2*CPLX_W+2)'(a.re) * (2*CPLX_W+2)'(b.im);
    ir = (2*CPLX_W+2)'(a.im) * (2*CPLX_W+2)'(b.re);
    re = rr - ii;
    im = ri + ir;
    if (frac > 0) begin
      re = (re + ((2*CPLX_W+2)'(1) <<< (frac - 1))) >>> frac;
      im = (im + ((2*CPLX_W+2)'(1) <<< (frac - 1))) >>> frac;
    end
    r.re = CPLX_W'(re);
    r.im = CPLX_W'(im);
    return r;
  endfunction

  function automatic cplx_t cadd(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = a.re + b.re;
    r.im = a.im + b.im;
    return r;
  endfunction

  function automatic cplx_t csub(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = a.re - b.re;
    r.im = a.im - b.im;
    return r;
  endfunction

  // Multiply by -j: (x + jy)(-j) = y - jx.
  function automatic cplx_t cmul_mj(cplx_t a);
    cplx_t r;
    r.re = a.im;
    r.im = -a.re;
    return r;
  endfunction

  function automatic cplx_t cconj(cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = -a.im;
    return r;
  endfunction

  // Arithmetic right shift with round-half-up of both components.
  function automatic cplx_t cshr(cplx_t a, int s);
    cplx_t r;
    logic signed [CPLX_W:0] re, im;
    if (s == 0) return a;
    re = ((CPLX_W+1)'(a.re) + ((CPLX_W+1)'(1) <<< (s - 1))) >>> s;
    im = ((CPLX_W+1)'(a.im) + ((CPLX_W+1)'(1) <<< (s - 1))) >>> s;
    r.re = CPLX_W'(re);
    r.im = CPLX_W'(im);
    return r;
  endfunction

  // Twiddle factor exp(sign * 2*pi*j*k/n) in fixed point (evaluated at
  // elaboration time for the constant twiddles inside the FFT units).
  function automatic cplx_t twiddle(int k, int n, bit inverse);
    cplx_t r;
    real ang;
    ang = 2.0 * 3.14159265358979323846 * real'(k) / real'(n);
    r.re = CPLX_W'(longint'($cos(ang) * (2.0 ** TW_FRAC)));
    r.im = CPLX_W'(longint'((inverse ? 1.0 : -1.0) * $sin(ang) * (2.0 ** TW_FRAC)));
    return r;
  endfunction

  // Signed digit `level` of the balanced gadget decomposition of torus value x
  // with base 2^base_log and `levels` levels (level 0 has weight
  // 2^(64-base_log)). Digits are produced least significant first with the
  // carry rule of the decomposer unit; the loop runs at most 8 steps.
  function automatic logic signed [31:0] decomp_digit(torus_t x, int base_log,
                                                       int levels, int level);
    torus_t st, r, q, carry, mask;
    int drop;
    logic signed [31:0] dig;
    drop = 64 - base_log * levels;
    st   = (x >> drop) + ((x >> (drop - 1)) & 64'd1);     // round
    st   = st & ((64'd1 << (64 - drop)) - 64'd1);
    mask = (64'd1 << base_log) - 64'd1;
    dig  = '0;
    for (int s = 0; s < 8; s++) begin
      if (s < levels) begin
        r     = st & mask;
        q     = st >> base_log;
        carry = ((((r - 64'd1) | q) & r) >> (base_log - 1)) & 64'd1;
        st    = q + carry;
        if (levels - 1 - s == level) dig = 32'(r) - (32'(carry) << base_log);
      end
    end
    return dig;
  endfunction

endpackage
