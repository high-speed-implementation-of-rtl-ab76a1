// pa_pkg: types, constants and arithmetic shared by the FFT-based privacy
// amplification (PA) datapath.
//
// Number format. The datapath carries complex values as two IEEE-754 style
// binary floating-point numbers (sign, FP_EW exponent bits, FP_MW fraction
// bits; default single precision). The arithmetic below is the subset the
// design needs: round-to-nearest-even add and multiply, with subnormal inputs
// and results flushed to zero and overflow saturated to infinity; NaN is not
// produced or recognised. That the datapath is floating point follows the
// text ("converts the data to the floating-points"); the precision, the
// flush-to-zero behaviour and the absence of NaN handling are choices of this
// design.
//
// All functions are combinational. Modules that use them register the result
// once; a real FPGA build would pipeline them further.
//
// The real <-> float conversions are used to compute twiddle-factor ROM
// contents at elaboration time and by testbenches; they are not meant to be
// synthesised as logic.
package pa_pkg;

  // ------------------------------------------------------------ float format
  localparam int FP_EW   = 8;
  localparam int FP_MW   = 23;
  localparam int FP_W    = 1 + FP_EW + FP_MW;
  localparam int FP_BIAS = (1 << (FP_EW - 1)) - 1;
  localparam int FP_EMAX = (1 << FP_EW) - 1;

  typedef struct packed {
    logic              sign;
    logic [FP_EW-1:0]  exp;
    logic [FP_MW-1:0]  man;
  } fp_t;

  typedef struct packed {
    fp_t re;
    fp_t im;
  } cplx_t;

  localparam int CPLX_W = 2 * FP_W;

  localparam fp_t FP_ZERO = '0;

  // ------------------------------------------------------ row operations
  // One operation moves one row (or column) of the K x K working matrix
  // through the FFT convolution unit.
  typedef enum logic [2:0] {
    OP_NONE = 3'd0,
    OP_FWD_ROW = 3'd1,  // input buffer row -> FFT -> twiddle -> DDR region 0 (tiled)
    OP_FWD_COL = 3'd2,  // DDR region 0 column -> FFT -> DDR region 1 (linear rows)
    OP_MUL_ROW = 3'd3,  // DDR region 1 rows k, -k -> multiply -> IFFT -> twiddle -> DDR region 2 (tiled)
    OP_INV_COL = 3'd4   // DDR region 2 column -> IFFT -> post-processing -> key bits
  } op_e;

  // ---------------------------------------------------------------- helpers
  function automatic fp_t fp_neg(fp_t a);
    fp_t r;
    r = a;
    if (a.exp != '0) r.sign = ~a.sign;
    return r;
  endfunction

  // Pack sign / biased exponent / rounded mantissa, with overflow to infinity
  // and underflow to zero.
  function automatic fp_t fp_pack(logic s, int e, logic [FP_MW-1:0] m);
    fp_t r;
    if (e <= 0) begin
      r = FP_ZERO;
    end else if (e >= FP_EMAX) begin
      r.sign = s;
      r.exp  = FP_EW'(FP_EMAX);
      r.man  = '0;
    end else begin
      r.sign = s;
      r.exp  = FP_EW'(e);
      r.man  = m;
    end
    return r;
  endfunction

  // ------------------------------------------------------------- multiply
  function automatic fp_t fp_mul(fp_t a, fp_t b);
    logic [2*FP_MW+1:0] p;
    logic [FP_MW:0]     m;      // one carry bit above the fraction
    logic               g, st, lsb;
    int                 e;
    if (a.exp == '0 || b.exp == '0) return FP_ZERO;
    p = {1'b1, a.man} * {1'b1, b.man};
    e = int'(a.exp) + int'(b.exp) - FP_BIAS;
    if (p[2*FP_MW+1]) begin
      m  = {1'b0, p[2*FP_MW:FP_MW+1]};
      g  = p[FP_MW];
      st = |p[FP_MW-1:0];
      e  = e + 1;
    end else begin
      m  = {1'b0, p[2*FP_MW-1:FP_MW]};
      g  = p[FP_MW-1];
      st = |p[FP_MW-2:0];
    end
    lsb = m[0];
    if (g && (st || lsb)) m = m + 1'b1;
    if (m[FP_MW]) e = e + 1;        // fraction wrapped to zero: 2.0
    return fp_pack(a.sign ^ b.sign, e, m[FP_MW-1:0]);
  endfunction

  // ------------------------------------------------------------------ add
  function automatic fp_t fp_add(fp_t a, fp_t b);
    fp_t                hi_op, lo_op;
    logic [FP_MW+4:0]   mb, ms, sum;    // 1 carry, hidden 1, fraction, G R S
    logic [FP_MW+4:0]   mask;
    logic               st, rnd;
    logic [FP_MW:0]     m;
    int                 d, e, sh;
    if (a.exp == '0) return (b.exp == '0) ? FP_ZERO : b;
    if (b.exp == '0) return a;
    if ({a.exp, a.man} >= {b.exp, b.man}) begin
      hi_op = a; lo_op = b;
    end else begin
      hi_op = b; lo_op = a;
    end
    mb = {2'b01, hi_op.man, 3'b000};
    ms = {2'b01, lo_op.man, 3'b000};
    d  = int'(hi_op.exp) - int'(lo_op.exp);
    if (d > FP_MW + 4) begin
      ms = {{(FP_MW+4){1'b0}}, 1'b1};   // only the sticky bit survives
    end else if (d > 0) begin
      mask = ({(FP_MW+5){1'b1}} << d);
      st   = |(ms & ~mask);
      ms   = (ms >> d);
      ms[0] = ms[0] | st;
    end
    e = int'(hi_op.exp);
    if (hi_op.sign == lo_op.sign) begin
      sum = mb + ms;
      if (sum[FP_MW+4]) begin
        sum = {1'b0, sum[FP_MW+4:2], sum[1] | sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = mb - ms;
      if (sum == '0) return FP_ZERO;
      sh = 0;
      for (int i = FP_MW + 3; i >= 0; i--) begin
        if (sum[i]) break;
        sh++;
      end
      sum = sum << sh;
      e   = e - sh;
    end
    // sum[FP_MW+3] is the hidden one; [2:0] are guard, round, sticky.
    rnd = sum[2] && (sum[1] || sum[0] || sum[3]);
    m   = {1'b0, sum[FP_MW+2:3]} + (FP_MW+1)'(rnd);
    if (m[FP_MW]) e = e + 1;
    return fp_pack(hi_op.sign, e, m[FP_MW-1:0]);
  endfunction

  function automatic fp_t fp_sub(fp_t a, fp_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  // Multiply by 2^k (k may be negative); exact unless it under/overflows.
  function automatic fp_t fp_scale2(fp_t a, int k);
    if (a.exp == '0) return FP_ZERO;
    return fp_pack(a.sign, int'(a.exp) + k, a.man);
  endfunction

  // ------------------------------------------------------ complex helpers
  function automatic cplx_t c_add(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = fp_add(a.re, b.re);
    r.im = fp_add(a.im, b.im);
    return r;
  endfunction

  function automatic cplx_t c_mul(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = fp_sub(fp_mul(a.re, b.re), fp_mul(a.im, b.im));
    r.im = fp_add(fp_mul(a.re, b.im), fp_mul(a.im, b.re));
    return r;
  endfunction

  function automatic cplx_t c_conj(cplx_t a);
    cplx_t r;
    r.re = a.re;
    r.im = fp_neg(a.im);
    return r;
  endfunction

  // ----------------------------------------------------- rounding to a bit
  // Parity of round(a * 2^-k): the post-processing step that turns an
  // unscaled inverse-FFT output into one bit of the cyclic convolution mod 2.
  function automatic logic fp_round_parity(fp_t a, int k);
    int                  e;
    logic [FP_MW+1:0]    m;
    logic [FP_MW+1:0]    r;
    if (a.exp == '0) return 1'b0;
    e = int'(a.exp) - FP_BIAS - k;       // value = 1.man * 2^e
    m = {2'b01, a.man};
    if (e < -1) return 1'b0;             // |value| < 0.5 rounds to 0
    if (e > FP_MW) return 1'b0;          // value is an even integer
    if (e == FP_MW) return a.man[0];
    r = (m + ((FP_MW+2)'(1) << (FP_MW - 1 - e))) >> (FP_MW - e);
    return r[0];
  endfunction

  // ------------------------------------------- real conversions (not synthesised)
  function automatic fp_t real_to_fp(real x);
    fp_t     r;
    real     a, frac, rem;
    int      e;
    longint  m;
    if (x == 0.0) return FP_ZERO;
    r.sign = (x < 0.0);
    a = (x < 0.0) ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    frac = (a - 1.0) * $pow(2.0, real'(FP_MW));
    m    = longint'($floor(frac));
    rem  = frac - real'(m);
    if (rem > 0.5 || (rem == 0.5 && m[0])) m++;
    if (m == (64'd1 << FP_MW)) begin m = 0; e++; end
    return fp_pack(r.sign, e + FP_BIAS, m[FP_MW-1:0]);
  endfunction

  function automatic real fp_to_real(fp_t a);
    real v;
    if (a.exp == '0) return 0.0;
    v = (1.0 + real'(a.man) / $pow(2.0, real'(FP_MW))) * $pow(2.0, real'(int'(a.exp) - FP_BIAS));
    return a.sign ? -v : v;
  endfunction

endpackage
