// hfint_vector_mac: one lane of the HFINT PE, a vector MAC that multiplies a
// VEC-element AdaptivFloat weight vector with a VEC-element AdaptivFloat
// activation vector, adds the VEC products and accumulates the result as an
// integer.
//
// Structure (as in the paper's PE figure): VEC hfint_mult units (exponent
// adder, mantissa multiplier, left shifter), an adder tree, and an
// accumulator register.  The accumulator is ACC_W = 2*(2^e-1) + 2*m +
// log2(H) bits wide, the paper's formula (30 bits for HFINT8/30).  That
// formula leaves out the implied-one and sign bits of the products, so a
// long run of large products can exceed it; the accumulator therefore
// saturates at the ACC_W-bit signed limits and raises `ovf` (this saturation
// is this design's choice; the paper only says the width avoids overflow).
//
// Timing: when `en` is high the accumulator is updated at the clock edge:
// acc <= (clear ? 0 : acc) + sum(products).  One vector per cycle.
// `ovf` is sticky per accumulation and is cleared together with acc.
module hfint_vector_mac #(
  parameter int unsigned N_BITS = adaptivfloat_pkg::N_BITS,
  parameter int unsigned N_EXP  = adaptivfloat_pkg::N_EXP,
  parameter int unsigned VEC    = adaptivfloat_pkg::VEC,
  parameter int unsigned ACC_W  = adaptivfloat_pkg::ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clear,
  input  logic [VEC*N_BITS-1:0]   w_vec,
  input  logic [VEC*N_BITS-1:0]   a_vec,
  output logic signed [ACC_W-1:0] acc,
  output logic                    ovf
);
  localparam int unsigned N_MANT = N_BITS - N_EXP - 1;
  localparam int unsigned PROD_W = 2 * (N_MANT + 1) + 2 * ((1 << N_EXP) - 1) + 1;
  localparam int unsigned SUM_W  = PROD_W + $clog2(VEC) + 1;
  localparam int unsigned WIDE_W = (SUM_W > ACC_W ? SUM_W : ACC_W) + 1;

  logic signed [PROD_W-1:0] prod [VEC];
  logic signed [SUM_W-1:0]  vsum;
  logic signed [WIDE_W-1:0] nxt;
  logic signed [WIDE_W-1:0] acc_max, acc_min;

  for (genvar i = 0; i < VEC; i++) begin : g_mul
    hfint_mult #(.N_BITS(N_BITS), .N_EXP(N_EXP)) u_mul (
      .w   (w_vec[i*N_BITS +: N_BITS]),
      .a   (a_vec[i*N_BITS +: N_BITS]),
      .prod(prod[i])
    );
  end

  always_comb begin
    vsum = '0;
    for (int i = 0; i < VEC; i++) vsum += SUM_W'(prod[i]);
    acc_max = WIDE_W'({1'b0, {(ACC_W-1){1'b1}}});
    acc_min = -acc_max - 1;
    nxt = (clear ? WIDE_W'(0) : WIDE_W'(acc)) + WIDE_W'(vsum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      ovf <= 1'b0;
    end else if (en) begin
      if (nxt > acc_max) begin
        acc <= ACC_W'(acc_max);
        ovf <= 1'b1;
      end else if (nxt < acc_min) begin
        acc <= ACC_W'(acc_min);
        ovf <= 1'b1;
      end else begin
        acc <= ACC_W'(nxt);
        ovf <= clear ? 1'b0 : ovf;
      end
    end
  end
endmodule
