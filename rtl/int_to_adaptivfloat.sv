// int_to_adaptivfloat: the "Integer-to-Float" stage at the end of the HFINT PE.
// It turns the n-bit signed integer activation (INT_FRAC fractional bits)
// into an AdaptivFloat<n,e> word for the output activation's exp_bias.
//
// The rounding rules are those of the paper's quantization algorithm, applied
// to one value with a known exp_bias = -bias_mag:
//   * value_min = 2^bias * (1 + 2^-m); a magnitude below it becomes
//     value_min if it is at least value_min/2, else zero;
//   * value_max = 2^(bias + 2^e - 1) * (2 - 2^-m); larger magnitudes clamp
//     to it;
//   * otherwise the mantissa is rounded to m bits, to nearest, ties away
//     from zero (the tie rule is this design's choice).
// A result of zero keeps the input's sign bit ("-0"), as in the paper's
// quantization example; an input of exactly 0 gives +0.  Combinational.
module int_to_adaptivfloat #(
  parameter int unsigned N_BITS   = adaptivfloat_pkg::N_BITS,
  parameter int unsigned N_EXP    = adaptivfloat_pkg::N_EXP,
  parameter int unsigned BIAS_W   = adaptivfloat_pkg::BIAS_W,
  parameter int unsigned INT_FRAC = adaptivfloat_pkg::INT_FRAC
) (
  input  logic signed [N_BITS-1:0] q,
  input  logic [BIAS_W-1:0]        bias_mag,
  output logic [N_BITS-1:0]        f
);
  localparam int unsigned N_MANT = N_BITS - N_EXP - 1;
  localparam int          EMAX   = (1 << N_EXP) - 1;
  localparam int unsigned CMP_W  = N_BITS + (1 << BIAS_W) + N_MANT + INT_FRAC + 4;

  logic              sgn;
  logic [N_BITS-1:0] mag;
  int                p, e_unb, sh;
  logic [N_MANT+1:0] mant;       // leading one + m bits + carry
  logic              rbit;
  logic [CMP_W-1:0]  lhs, rhs;

  always_comb begin
    sgn  = q[N_BITS-1];
    mag  = sgn ? N_BITS'(-q) : N_BITS'(q);
    p    = 0;
    for (int i = 0; i < N_BITS; i++) if (mag[i]) p = i;
    e_unb = p - int'(INT_FRAC) + int'(bias_mag);
    sh    = p - int'(N_MANT);
    mant  = '0;
    rbit  = 1'b0;
    if (sh >= 0) begin
      mant = (N_MANT+2)'(mag >> sh);
      if (sh >= 1) rbit = mag[sh-1];
    end else begin
      mant = (N_MANT+2)'(mag << (-sh));
    end
    mant = mant + (N_MANT+2)'(rbit);
    if (mant[N_MANT+1]) begin       // rounding carried into the next binade
      mant  = mant >> 1;
      e_unb = e_unb + 1;
    end
    // below value_min: compare mag*2^-F against value_min/2, i.e.
    // mag * 2^(bias_mag + 1 + m) >= 2^F * (2^m + 1)
    lhs = CMP_W'(mag) << (int'(bias_mag) + 1 + int'(N_MANT));
    rhs = CMP_W'((1 << N_MANT) + 1) << INT_FRAC;

    if (mag == '0) begin
      f = '0;
    end else if (p - int'(INT_FRAC) + int'(bias_mag) < 0) begin
      if (lhs >= rhs) f = {sgn, {(N_EXP){1'b0}}, N_MANT'(1)};
      else            f = {sgn, {(N_BITS-1){1'b0}}};
    end else if (e_unb > EMAX) begin
      f = {sgn, {(N_BITS-1){1'b1}}};
    end else if (e_unb == 0 && mant[N_MANT-1:0] == '0) begin
      // exactly 2^bias lies below value_min: it is the sacrificed code
      f = {sgn, {(N_EXP){1'b0}}, N_MANT'(1)};
    end else begin
      f = {sgn, N_EXP'(e_unb), mant[N_MANT-1:0]};
    end
  end
endmodule
