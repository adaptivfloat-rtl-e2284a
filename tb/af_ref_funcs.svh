// Reference functions for the testbenches, written from the AdaptivFloat
// definition with real arithmetic (independent of the RTL):
//   af_decode  - value of an AdaptivFloat<n,e> word for exp_bias = -bias_mag
//   af_encode  - quantise a real value to AdaptivFloat<n,e>: below value_min
//                round to 0 or value_min at the halfway point, clamp above
//                value_max, otherwise round the mantissa to m bits (ties
//                away from zero); a zero result keeps the sign bit
//   act_ref    - the four activation modes on a real value that is a
//                multiple of 2^-INT_FRAC
// Requires adaptivfloat_pkg to be imported.
function automatic real pow2(int k);
  real r = 1.0;
  if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
  else        for (int i = 0; i < -k; i++) r = r / 2.0;
  return r;
endfunction

function automatic real af_decode(logic [N_BITS-1:0] x, int bias_mag);
  real v;
  if (x[N_BITS-2:0] == 0) return 0.0;
  v = (1.0 + real'(x[N_MANT-1:0]) / real'(1 << N_MANT)) * pow2(int'(x[N_BITS-2:N_MANT]) - bias_mag);
  return x[N_BITS-1] ? -v : v;
endfunction

function automatic logic [N_BITS-1:0] af_encode(real v, int bias_mag);
  real a, vmin, vmax, mant;
  int  b, ex, mq;
  logic s;
  if (v == 0.0) return '0;
  s = v < 0.0;
  a = s ? -v : v;
  b = -bias_mag;
  vmin = pow2(b) * (1.0 + pow2(-int'(N_MANT)));
  vmax = pow2(b + (1 << N_EXP) - 1) * (2.0 - pow2(-int'(N_MANT)));
  if (a < vmin) a = (a >= vmin / 2.0) ? vmin : 0.0;
  if (a > vmax) a = vmax;
  if (a == 0.0) return {s, {(N_BITS-1){1'b0}}};
  ex = b;
  while (pow2(ex + 1) <= a) ex++;
  mant = a / pow2(ex);
  mq = $rtoi($floor((mant - 1.0) * real'(1 << N_MANT) + 0.5));
  if (mq == (1 << N_MANT)) begin mq = 0; ex++; end
  return {s, N_EXP'(ex - b), N_MANT'(mq)};
endfunction

function automatic real act_ref(int mode, real x);
  real y;
  case (mode)
    0: y = x;
    1: y = x < 0.0 ? 0.0 : x;
    2: y = x > 1.0 ? 1.0 : (x < -1.0 ? -1.0 : x);
    default: begin
      y = $floor(x * real'(1 << INT_FRAC) / 4.0) / real'(1 << INT_FRAC) + 0.5;
      y = y > 1.0 ? 1.0 : (y < 0.0 ? 0.0 : y);
    end
  endcase
  return y;
endfunction

// One PE output element: dot product (real) -> floor to INT_FRAC fraction
// bits -> clip to n-bit signed -> activation -> AdaptivFloat encode.
function automatic logic [N_BITS-1:0] pe_ref(real dot, int mode, int obias_mag, output bit clipped);
  real q, lim;
  q = $floor(dot * real'(1 << INT_FRAC));
  lim = real'((1 << (N_BITS - 1)) - 1);
  clipped = 0;
  if (q > lim)        begin q = lim;        clipped = 1; end
  if (q < -lim - 1.0) begin q = -lim - 1.0; clipped = 1; end
  return af_encode(act_ref(mode, q / real'(1 << INT_FRAC)), obias_mag);
endfunction
