// hfint_mult: one AdaptivFloat x AdaptivFloat multiplier of the HFINT vector
// MAC, producing a signed fixed-point (integer) term.
//
// Following the PE figure, the two exponent fields are added, the two
// mantissas (with their implied leading one) are multiplied, and the
// mantissa product is shifted left by the exponent sum.  The exponent biases
// are not applied here: every term of a dot product shares the same
// weight-bias + activation-bias, so that common shift is applied once, after
// accumulation.  The term is therefore
//   prod = +/- (2^m + Mw) * (2^m + Ma) << (Ew + Ea)
// and the real product is prod * 2^(bias_w + bias_a - 2m).  A zero operand
// (exponent and mantissa fields all zero) gives a zero term.
// Purely combinational.
module hfint_mult #(
  parameter int unsigned N_BITS = adaptivfloat_pkg::N_BITS,
  parameter int unsigned N_EXP  = adaptivfloat_pkg::N_EXP,
  localparam int unsigned N_MANT = N_BITS - N_EXP - 1,
  localparam int unsigned PROD_W = 2 * (N_MANT + 1) + 2 * ((1 << N_EXP) - 1) + 1
) (
  input  logic [N_BITS-1:0]        w,
  input  logic [N_BITS-1:0]        a,
  output logic signed [PROD_W-1:0] prod
);
  logic                    w_zero, a_zero, sgn;
  logic [N_EXP:0]          exp_sum;
  logic [2*N_MANT+1:0]     mant_prod;
  logic [PROD_W-2:0]       mag;

  always_comb begin
    w_zero    = (w[N_BITS-2:0] == '0);
    a_zero    = (a[N_BITS-2:0] == '0);
    sgn       = w[N_BITS-1] ^ a[N_BITS-1];
    exp_sum   = {1'b0, w[N_BITS-2:N_MANT]} + {1'b0, a[N_BITS-2:N_MANT]};
    mant_prod = {1'b1, w[N_MANT-1:0]} * {1'b1, a[N_MANT-1:0]};
    mag       = (PROD_W-1)'(mant_prod) << exp_sum;
    if (w_zero || a_zero) prod = '0;
    else if (sgn)         prod = -$signed({1'b0, mag});
    else                  prod =  $signed({1'b0, mag});
  end
endmodule
