// tb_int_to_adaptivfloat: exhaustive check of every 8-bit integer for every
// 4-bit exp_bias magnitude.  The reference follows the quantization
// algorithm step by step in real arithmetic (round below value_min to 0 or
// value_min at the halfway point, clamp above value_max, round the
// normalised mantissa to m bits) and then encodes the result; the output
// word must match exactly.
module tb_int_to_adaptivfloat;
  import adaptivfloat_pkg::*;
  logic signed [N_BITS-1:0] q;
  logic [BIAS_W-1:0]        bias_mag;
  logic [N_BITS-1:0]        f;
  int checks = 0, failures = 0;

  int_to_adaptivfloat dut (.*);

  function automatic real pow2(int k);
    real r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic logic [N_BITS-1:0] ref_enc(int v, int bm);
    real a, vmin, vmax, mant;
    int  b, ex, mq, emax;
    logic s;
    s = v < 0;
    a = (v < 0 ? -real'(v) : real'(v)) / real'(1 << INT_FRAC);
    b = -bm;
    emax = b + (1 << N_EXP) - 1;
    vmin = pow2(b) * (1.0 + pow2(-int'(N_MANT)));
    vmax = pow2(emax) * (2.0 - pow2(-int'(N_MANT)));
    if (v == 0) return '0;
    if (a < vmin) a = (a >= vmin / 2.0) ? vmin : 0.0;
    if (a > vmax) a = vmax;
    if (a == 0.0) return {s, {(N_BITS-1){1'b0}}};
    ex = $rtoi($floor($ln(a) / $ln(2.0) + 1e-12));
    if (pow2(ex) > a) ex--;
    if (pow2(ex + 1) <= a) ex++;
    mant = a / (pow2(ex));
    mq = $rtoi($floor((mant - 1.0) * real'(1 << N_MANT) + 0.5));
    if (mq == (1 << N_MANT)) begin mq = 0; ex++; end
    return {s, N_EXP'(ex - b), N_MANT'(mq)};
  endfunction

  initial begin
    for (int bm = 0; bm < (1 << BIAS_W); bm++) begin
      for (int v = -(1 << (N_BITS - 1)); v < (1 << (N_BITS - 1)); v++) begin
        logic [N_BITS-1:0] e;
        q = N_BITS'(v); bias_mag = BIAS_W'(bm);
        e = ref_enc(v, bm);
        #1; checks++;
        if (f !== e) begin
          failures++;
          $display("FAIL q=%0d bm=%0d f=%h exp=%h", v, bm, f, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
