// tb_hfint_shift_trunc: checks the post-accumulation shift and n-bit clip.
// The reference computes floor(acc * 2^-(wb + ab + 2m - F)) with real
// arithmetic and clips it to the 8-bit signed range.
module tb_hfint_shift_trunc;
  import adaptivfloat_pkg::*;
  logic signed [ACC_W-1:0]  acc;
  logic [BIAS_W-1:0]        wbias_mag, abias_mag;
  logic signed [N_BITS-1:0] q;
  logic                     sat;
  int checks = 0, failures = 0;

  hfint_shift_trunc dut (.*);

  initial begin
    for (int i = 0; i < 4000; i++) begin
      real r, lim;
      longint e;
      bit esat;
      int sh;
      wbias_mag = BIAS_W'($urandom); abias_mag = BIAS_W'($urandom);
      acc = ACC_W'($urandom);
      if (i % 3 == 0) acc = ACC_W'($signed(ACC_W'($urandom)) >>> ($urandom % 28));
      sh = int'(wbias_mag) + int'(abias_mag) + 2 * N_MANT - INT_FRAC;
      r = $floor(real'(acc) / (2.0 ** sh));
      lim = real'((1 << (N_BITS - 1)) - 1);
      esat = 0;
      if (r > lim)        begin r = lim;        esat = 1; end
      if (r < -lim - 1.0) begin r = -lim - 1.0; esat = 1; end
      e = longint'(r);
      #1; checks++;
      if (longint'(q) != e || sat != esat) begin
        failures++;
        $display("FAIL acc=%0d wb=%0d ab=%0d q=%0d sat=%0b exp=%0d/%0b", acc, wbias_mag, abias_mag, q, sat, e, esat);
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
