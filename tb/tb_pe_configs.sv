// tb_pe_configs: the HFINT PE at the other design points of its evaluation
// space - 4-bit and 8-bit operands, vector sizes 4, 8 and 16 (the default
// PE, 8-bit with vector size 16, has its own testbench).  Each point is one
// pe_config_check instance with its own PE; all run in parallel and the
// totals are reported.
//
// 8-bit points use AdaptivFloat<8,3> with 4 fraction bits in the PE's
// integer, as in the default PE.  4-bit points use AdaptivFloat<4,2> (one
// mantissa bit) with 2 fraction bits: with 3 exponent bits a 4-bit word
// would have no mantissa, and the integer grid must not be finer than the
// 2m fraction bits of a product.  The accumulator width follows
// 2*(2^e-1) + 2m + log2(256).
module tb_pe_configs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NCFG = 5;
  int   c_checks [NCFG], c_fail [NCFG];
  logic c_done [NCFG];

  pe_config_check #(.NB(4), .NE(2), .V(4),  .FR(2)) u_4_4  (.clk, .rst_n, .checks(c_checks[0]), .failures(c_fail[0]), .done(c_done[0]));
  pe_config_check #(.NB(4), .NE(2), .V(8),  .FR(2)) u_4_8  (.clk, .rst_n, .checks(c_checks[1]), .failures(c_fail[1]), .done(c_done[1]));
  pe_config_check #(.NB(4), .NE(2), .V(16), .FR(2)) u_4_16 (.clk, .rst_n, .checks(c_checks[2]), .failures(c_fail[2]), .done(c_done[2]));
  pe_config_check #(.NB(8), .NE(3), .V(4),  .FR(4)) u_8_4  (.clk, .rst_n, .checks(c_checks[3]), .failures(c_fail[3]), .done(c_done[3]));
  pe_config_check #(.NB(8), .NE(3), .V(8),  .FR(4)) u_8_8  (.clk, .rst_n, .checks(c_checks[4]), .failures(c_fail[4]), .done(c_done[4]));

  function automatic bit all_done();
    for (int i = 0; i < NCFG; i++) if (!c_done[i]) return 0;
    return 1;
  endfunction

  function automatic void report(int extra_fail);
    int checks = 0, failures = extra_fail;
    for (int i = 0; i < NCFG; i++) begin checks += c_checks[i]; failures += c_fail[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endfunction

  initial begin
    #2000000;
    $display("watchdog");
    report(1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    while (!all_done()) @(posedge clk);
    for (int i = 0; i < NCFG; i++) $display("config %0d: checks=%0d failures=%0d", i, c_checks[i], c_fail[i]);
    report(0);
    $finish;
  end
endmodule
