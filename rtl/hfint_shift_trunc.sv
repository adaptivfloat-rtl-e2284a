// hfint_shift_trunc: the post-accumulation ">>" and "Truncation" stages of the
// HFINT PE.
//
// The accumulator holds sum * 2^(bias_w + bias_a - 2m) (see hfint_mult).  The
// PE hands the activation an n-bit signed integer with INT_FRAC fractional
// bits, so the accumulator is shifted right (arithmetic, truncating toward
// minus infinity) by
//   shamt = |bias_w| + |bias_a| + 2m - INT_FRAC
// which is derived from the weight and activation exp_bias registers, as in
// the paper's figure.  The shifted value is then clipped to the n-bit signed
// range and `sat` flags a clip.  The paper gives the shift by the biases and
// the clip/truncate to n bits; the fixed INT_FRAC and the floor rounding are
// this design's choices.  Combinational.
module hfint_shift_trunc #(
  parameter int unsigned N_BITS   = adaptivfloat_pkg::N_BITS,
  parameter int unsigned N_EXP    = adaptivfloat_pkg::N_EXP,
  parameter int unsigned ACC_W    = adaptivfloat_pkg::ACC_W,
  parameter int unsigned BIAS_W   = adaptivfloat_pkg::BIAS_W,
  parameter int unsigned INT_FRAC = adaptivfloat_pkg::INT_FRAC
) (
  input  logic signed [ACC_W-1:0]  acc,
  input  logic [BIAS_W-1:0]        wbias_mag,
  input  logic [BIAS_W-1:0]        abias_mag,
  output logic signed [N_BITS-1:0] q,
  output logic                     sat
);
  localparam int unsigned N_MANT = N_BITS - N_EXP - 1;
  localparam int unsigned SH_W   = BIAS_W + 2 + $clog2(2 * N_MANT + 1);

  logic [SH_W-1:0]          shamt;
  logic signed [ACC_W-1:0]  shifted;
  logic signed [ACC_W-1:0]  qmax, qmin;

  always_comb begin
    shamt   = SH_W'(wbias_mag) + SH_W'(abias_mag) + SH_W'(2 * N_MANT) - SH_W'(INT_FRAC);
    shifted = acc >>> shamt;
    qmax    = ACC_W'((1 << (N_BITS - 1)) - 1);
    qmin    = -qmax - 1;
    sat     = 1'b0;
    if (shifted > qmax) begin
      q   = N_BITS'(qmax);
      sat = 1'b1;
    end else if (shifted < qmin) begin
      q   = N_BITS'(qmin);
      sat = 1'b1;
    end else begin
      q   = N_BITS'(shifted);
    end
  end

  initial assert (INT_FRAC <= 2 * N_MANT)
    else $error("INT_FRAC must not exceed 2*N_MANT: the shift would be negative");
endmodule
