// Reference arithmetic for the FP testbenches, written with real numbers and independent of
// the RTL: decoding of an encoding to a real value, and rounding of a real value (which must
// be exact in double precision) to a format with a given rounding mode.
// fmt: 0 float, 1 float16, 2 bfloat16. rm: 0 RNE, 1 RTZ, 2 RDN, 3 RUP, 4 RMM.

function automatic int ref_m(int fmt);
  return (fmt == 1) ? 10 : (fmt == 2) ? 7 : 23;
endfunction
function automatic int ref_e(int fmt);
  return (fmt == 1) ? 5 : 8;
endfunction

function automatic real pow2(int e);
  real r = 1.0;
  if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
  else        for (int i = 0; i < -e; i++) r = r / 2.0;
  return r;
endfunction

function automatic bit ref_is_nan(int fmt, logic [31:0] v);
  int m = ref_m(fmt), eb = ref_e(fmt);
  return (((v >> m) & ((1 << eb) - 1)) == (1 << eb) - 1) && ((v & ((1 << m) - 1)) != 0);
endfunction

function automatic real ref_val(int fmt, logic [31:0] v);
  int m = ref_m(fmt), eb = ref_e(fmt);
  int bias = (1 << (eb - 1)) - 1;
  int ef = int'((v >> m) & ((1 << eb) - 1));
  real f = real'(v & ((1 << m) - 1));
  real r;
  if (ef == 0) r = f * pow2(1 - bias - m);
  else         r = (f + pow2(m)) * pow2(ef - bias - m);
  return v[eb + m] ? -r : r;
endfunction

// Returns {nx, encoding}. The exact value is r + t where t is far below the last bit of r
// (the error term of a two-sum); only the sign of t, tail, is needed.
function automatic logic [32:0] ref_round(real r, bit neg, int fmt, int rm, int tail = 0);
  int m = ref_m(fmt), eb = ref_e(fmt);
  int bias = (1 << (eb - 1)) - 1;
  int e;
  real x, scaled, q, fr;
  bit inc, s, gt_half, eq_half, nz;
  int tl;
  logic [63:0] rb;
  logic [31:0] res;
  s = (r < 0.0) || (r == 0.0 && neg);
  x = (r < 0.0) ? -r : r;
  if (x == 0.0) return {1'b0, 32'(s) << (eb + m)};
  rb = $realtobits(x);
  e = int'(rb[62:52]) - 1023;
  if (e < 1 - bias) e = 1 - bias;
  scaled = x * pow2(m - e);
  q = $floor(scaled);
  fr = scaled - q;
  tl = (r < 0.0) ? -tail : tail;
  if (fr == 0.0 && tl < 0) begin q = q - 1.0; fr = 1.0; end
  gt_half = (fr > 0.5) || (fr == 0.5 && tl > 0);
  eq_half = (fr == 0.5) && (tl == 0);
  nz      = (fr > 0.0) || (tl != 0);
  case (rm)
    0: inc = gt_half || (eq_half && ($rtoi(q) % 2 == 1));
    1: inc = 0;
    2: inc = s && nz;
    3: inc = !s && nz;
    default: inc = gt_half || eq_half;
  endcase
  if (inc) q = q + 1.0;
  if (q >= pow2(m + 1)) begin q = q / 2.0; e = e + 1; end
  if (e > bias) begin
    if (rm == 1 || (rm == 2 && !s) || (rm == 3 && s))
      res = (32'(s) << (eb + m)) | (32'((1 << eb) - 2) << m) | 32'((1 << m) - 1);
    else
      res = (32'(s) << (eb + m)) | (32'((1 << eb) - 1) << m);
    return {1'b1, res};
  end
  if (q < pow2(m)) res = (32'(s) << (eb + m)) | 32'($rtoi(q));
  else res = (32'(s) << (eb + m)) | (32'(e + bias) << m) | 32'($rtoi(q - pow2(m)));
  return {nz, res};
endfunction

function automatic logic [31:0] ref_rand_fp(int fmt);
  int m = ref_m(fmt), eb = ref_e(fmt);
  logic [31:0] v;
  int ef;
  v = $urandom;
  ef = int'($urandom_range((1 << eb) - 2, 0));
  // bias half of the draws towards mid-range exponents
  if ($urandom_range(1, 0) == 1) ef = ((1 << (eb - 1)) - 1) + int'($urandom_range(8, 0)) - 4;
  return (32'(v[31]) << (eb + m)) | (32'(ef) << m) | (v & ((32'd1 << m) - 1));
endfunction

// two-sum: s = fl(p + c), returns the sign of the exact error (p + c) - s
function automatic int two_sum_tail(real p, real c, output real s);
  real bb, err;
  s = p + c;
  bb = s - p;
  err = (p - (s - bb)) + (c - bb);
  return (err > 0.0) ? 1 : (err < 0.0) ? -1 : 0;
endfunction
