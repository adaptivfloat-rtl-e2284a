// tb_broadcast_bus: a source streams 300 numbered beats into the broadcast
// bus while each of the four destinations is ready at random.  Every
// destination must receive every beat exactly once and in order; the test
// also counts the cycles in which the source was held back.
module tb_broadcast_bus;
  localparam int ND = adaptivfloat_pkg::NUM_PE;
  localparam int PW = adaptivfloat_pkg::MSG_W;
  localparam int NB = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready;
  logic [PW-1:0] in_data, out_data;
  logic [ND-1:0] out_valid, out_ready;
  int sent = 0, got [ND];
  int checks = 0, failures = 0, backpressure = 0;

  broadcast_bus dut (.*);

  function automatic logic [PW-1:0] beat(int n);
    return PW'(n) | (PW'(n * 13 + 5) << 64);
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) sent <= sent + 1;
      if (in_valid && !in_ready) backpressure <= backpressure + 1;
      for (int d = 0; d < ND; d++) if (out_valid[d] && out_ready[d]) begin
        checks <= checks + 1;
        if (out_data !== beat(got[d])) begin failures <= failures + 1; $display("FAIL dst %0d beat %0d", d, got[d]); end
        got[d] <= got[d] + 1;
      end
    end
  end

  always @(negedge clk) begin
    in_valid = sent < NB;
    in_data  = beat(sent);
    for (int d = 0; d < ND; d++) out_ready[d] = ($urandom % 3) != 0;
  end

  initial begin
    #400000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int d = 0; d < ND; d++) got[d] = 0;
    in_valid = 0; out_ready = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (got[0] == NB && got[1] == NB && got[2] == NB && got[3] == NB);
    repeat (5) @(posedge clk);
    for (int d = 0; d < ND; d++) begin
      checks++; if (got[d] != NB) begin failures++; $display("FAIL count %0d", d); end
    end
    checks++; if (backpressure == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
