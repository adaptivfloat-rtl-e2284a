// tb_arbitrated_crossbar: four sources each send 200 numbered messages at
// random times into the crossbar while the sink is randomly not ready.
// Checks: every message arrives exactly once, in order per source, tagged
// with the right source index; with all four requesting continuously, the
// grants rotate so that no source is passed over more than NUM_SRC-1 times.
module tb_arbitrated_crossbar;
  localparam int NS = adaptivfloat_pkg::NUM_PE;
  localparam int PW = adaptivfloat_pkg::MSG_W;
  localparam int NMSG = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NS-1:0] in_valid, in_ready;
  logic [PW-1:0] in_data [NS];
  logic out_valid, out_ready;
  logic [PW-1:0] out_data;
  logic [1:0] out_src;
  int sent [NS], got [NS], waited [NS];
  initial in_valid = '0;
  int checks = 0, failures = 0, conflicts = 0;
  bit saturate = 0;

  arbitrated_crossbar dut (.*);

  function automatic logic [PW-1:0] msg(int s, int n);
    return (PW'(s) << 20) | PW'(n) | (PW'(n * 7 + s) << 40);
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int s = 0; s < NS; s++) begin
        if (in_valid[s] && in_ready[s]) begin
          sent[s] <= sent[s] + 1; waited[s] <= 0;
          in_valid[s] <= (sent[s] + 1 < NMSG) && (saturate || ($urandom % 3 == 0));
        end else begin
          if (in_valid[s]) waited[s] <= waited[s] + 1;
          else in_valid[s] <= (sent[s] < NMSG) && (saturate || ($urandom % 3 == 0));
        end
      end
      if ($countones(in_valid) > 1) conflicts <= conflicts + 1;
      if (out_valid && out_ready) begin
        automatic int s = int'(out_src);
        checks <= checks + 1;
        if (out_data !== msg(s, got[s])) begin
          failures <= failures + 1; $display("FAIL src %0d msg %0d", s, got[s]);
        end
        got[s] <= got[s] + 1;
      end
      if (saturate) for (int s = 0; s < NS; s++) if (waited[s] > 2 * NS) begin
        failures <= failures + 1; $display("FAIL starvation of %0d", s);
      end
    end
  end

  for (genvar g = 0; g < NS; g++) begin : g_d
    assign in_data[g] = msg(g, sent[g]);
  end

  always @(negedge clk) begin
    out_ready = saturate ? 1'b1 : (($urandom % 4) != 0);
  end

  initial begin
    #400000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    out_ready = 0;
    for (int s = 0; s < NS; s++) begin sent[s] = 0; got[s] = 0; waited[s] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (400) @(posedge clk);
    saturate = 1;
    wait (sent[0] == NMSG && sent[1] == NMSG && sent[2] == NMSG && sent[3] == NMSG);
    repeat (5) @(posedge clk);
    for (int s = 0; s < NS; s++) begin
      checks++; if (got[s] != NMSG) begin failures++; $display("FAIL count %0d: %0d", s, got[s]); end
    end
    checks++; if (conflicts == 0) begin failures++; $display("FAIL no conflict seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
