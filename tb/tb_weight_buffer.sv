// tb_weight_buffer: self-checking test of the weight buffer at its default size.
// Random byte-masked writes to random rows are mirrored in an associative
// array; reads are compared one cycle later, and a read with rd_en low must
// leave rdata unchanged.  The first and last rows are exercised.
module tb_weight_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int ROW_W = adaptivfloat_pkg::VEC * adaptivfloat_pkg::VEC * adaptivfloat_pkg::N_BITS;
  localparam int ROWS  = adaptivfloat_pkg::WBUF_BYTES / (ROW_W / 8);
  localparam int AW    = $clog2(ROWS);
  logic we = 0, rd_en = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [ROW_W-1:0] wdata = '0, rdata;
  logic [ROW_W/8-1:0] wmask = '0;
  logic [ROW_W-1:0] shadow [int];
  int checks = 0, failures = 0;

  weight_buffer dut (.*);

  function automatic logic [ROW_W-1:0] rnd_row();
    logic [ROW_W-1:0] r;
    for (int i = 0; i < ROW_W / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    #200000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int used [$];
    for (int i = 0; i < 64; i++) begin
      automatic int r = (i == 0) ? 0 : (i == 1) ? ROWS - 1 : int'($urandom % ROWS);
      @(negedge clk);
      we = 1; waddr = AW'(r); wdata = rnd_row(); wmask = '1;
      shadow[r] = wdata; used.push_back(r);
    end
    for (int i = 0; i < 200; i++) begin      // partial writes
      automatic int r = used[$urandom % used.size()];
      logic [ROW_W/8-1:0] m;
      logic [ROW_W-1:0] d;
      for (int b = 0; b < ROW_W / 32; b++) m[b*4 +: 4] = 4'($urandom);
      d = rnd_row();
      @(negedge clk);
      we = 1; waddr = AW'(r); wdata = d; wmask = m;
      for (int b = 0; b < ROW_W / 8; b++) if (m[b]) shadow[r][b*8 +: 8] = d[b*8 +: 8];
    end
    @(negedge clk); we = 0;
    foreach (used[k]) begin
      logic [ROW_W-1:0] held;
      @(negedge clk); rd_en = 1; raddr = AW'(used[k]);
      @(negedge clk); rd_en = 0; raddr = AW'($urandom);
      checks++;
      if (rdata !== shadow[used[k]]) begin failures++; $display("FAIL row %0d", used[k]); end
      held = rdata;
      @(negedge clk); checks++;
      if (rdata !== held) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
