// hfint_activation: the activation-function stage of the HFINT PE, applied
// to the n-bit signed integer (INT_FRAC fractional bits) that leaves the
// truncation stage.
//
// The paper only names an activation function here.  This design offers four
// modes, chosen per layer by a PE register: none, ReLU, hard tanh
// (clip to [-1, 1]) and hard sigmoid (clip(x/4 + 1/2, 0, 1)); the last two
// are the usual piecewise-linear stand-ins for the tanh and sigmoid of LSTM
// cells.  Combinational.
module hfint_activation #(
  parameter int unsigned N_BITS   = adaptivfloat_pkg::N_BITS,
  parameter int unsigned INT_FRAC = adaptivfloat_pkg::INT_FRAC
) (
  input  adaptivfloat_pkg::act_mode_e mode,
  input  logic signed [N_BITS-1:0]    x,
  output logic signed [N_BITS-1:0]    y
);
  import adaptivfloat_pkg::*;

  localparam logic signed [N_BITS+1:0] ONE  = (N_BITS+2)'(1 << INT_FRAC);
  localparam logic signed [N_BITS+1:0] HALF = (N_BITS+2)'(1 << (INT_FRAC - 1));

  logic signed [N_BITS+1:0] xw, t;

  always_comb begin
    xw = (N_BITS+2)'(x);
    t  = xw;
    unique case (mode)
      ACT_NONE:     t = xw;
      ACT_RELU:     t = (xw < 0) ? '0 : xw;
      ACT_HARDTANH: t = (xw > ONE) ? ONE : ((xw < -ONE) ? -ONE : xw);
      ACT_HARDSIG: begin
        t = (xw >>> 2) + HALF;
        if (t > ONE) t = ONE;
        if (t < 0)   t = '0;
      end
      default:      t = xw;
    endcase
    y = N_BITS'(t);
  end

  initial assert (INT_FRAC >= 1 && INT_FRAC <= N_BITS - 2)
    else $error("hard tanh/sigmoid need 1.0 to fit the n-bit integer");
endmodule
