// tb_hfint_vector_mac: self-checking test of one HFINT vector MAC lane at the
// default size (16-element vectors, AdaptivFloat<8,3>, 30-bit accumulator).
// The reference decodes every operand to a real number (exp_bias 0),
// multiplies and sums in floating point, scales by 2^(2m) and saturates to
// the accumulator range; the lane must match bit for bit.  Covers zero
// operands, negative values, multi-cycle accumulation, clear, hold (en low)
// and positive/negative saturation with the ovf flag.
module tb_hfint_vector_mac;
  import adaptivfloat_pkg::*;
  localparam int V = VEC;
  logic clk = 0, rst_n = 0, en = 0, clear = 0;
  logic [V*N_BITS-1:0] w_vec, a_vec;
  logic signed [ACC_W-1:0] acc;
  logic ovf;
  int checks = 0, failures = 0;
  real ref_acc;
  logic ref_ovf;

  hfint_vector_mac dut (.*);
  always #5 clk = ~clk;

  function automatic real af_val(logic [N_BITS-1:0] x);
    real v;
    if (x[N_BITS-2:0] == 0) return 0.0;
    v = (1.0 + real'(x[N_MANT-1:0]) / real'(1 << N_MANT)) * real'(1 << x[N_BITS-2:N_MANT]);
    return x[N_BITS-1] ? -v : v;
  endfunction

  task automatic step(bit do_clear, int kind);
    real s = 0.0, lim;
    for (int i = 0; i < V; i++) begin
      logic [N_BITS-1:0] w, a;
      w = N_BITS'($urandom); a = N_BITS'($urandom);
      if (kind == 1) begin w = 8'h7F; a = 8'h7F; end
      if (kind == 2) begin w = 8'hFF; a = 8'h7F; end
      if (kind == 0 && ($urandom % 8) == 0) w[N_BITS-2:0] = '0;
      w_vec[i*N_BITS +: N_BITS] = w; a_vec[i*N_BITS +: N_BITS] = a;
      s += af_val(w) * af_val(a) * real'(1 << (2 * N_MANT));
    end
    lim = real'((longint'(1) << (ACC_W - 1)) - 1);
    if (do_clear) begin ref_acc = 0.0; ref_ovf = 0; end
    ref_acc += s;
    if (ref_acc > lim)        begin ref_acc = lim;        ref_ovf = 1; end
    if (ref_acc < -lim - 1.0) begin ref_acc = -lim - 1.0; ref_ovf = 1; end
    en = 1; clear = do_clear;
    @(posedge clk); #1;
    en = 0; clear = 0;
    checks++;
    if (real'(acc) != ref_acc || ovf !== ref_ovf) begin
      failures++;
      $display("FAIL acc=%0d ovf=%0b exp=%0.1f/%0b", acc, ovf, ref_acc, ref_ovf);
    end
  endtask

  initial begin
    #20000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    w_vec = '0; a_vec = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int r = 0; r < 40; r++) begin
      automatic int len = 1 + ($urandom % 16);
      for (int c = 0; c < len; c++) step(c == 0, 0);
      // hold: en low must keep acc
      @(posedge clk); #1; checks++;
      if (real'(acc) != ref_acc) begin failures++; $display("FAIL hold"); end
    end
    for (int c = 0; c < 4; c++) step(c == 0, 1);   // positive saturation
    for (int c = 0; c < 4; c++) step(c == 0, 2);   // negative saturation
    step(1, 0);                                     // clear drops ovf
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
