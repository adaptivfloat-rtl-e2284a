// tb_hfint_pe: end-to-end test of one HFINT PE at its default size.
// The host side loads a random weight matrix (in AdaptivFloat<8,3>) through
// AXI, the input vector arrives over the broadcast port (the beat marked
// last starts a pass in AUTO_RUN mode), and the output rows are taken from
// the crossbar port with a randomly stalling ready.  Each output element is
// compared with a real-arithmetic reference (decode, dot product, floor to
// the integer grid, clip, activation, re-encode).  Three passes with
// different shapes, exp_bias values and activation modes; the second is
// started with the CTRL register.  Also checks the pass throughput
// (NUM_GROUPS*NUM_CHUNKS + 3 cycles with an always-ready crossbar), that a
// stall happened, and the status flags.
module tb_hfint_pe;
  import adaptivfloat_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t  m_req;
  axil_resp_t m_resp;
  logic bc_valid, bc_ready, out_valid, out_ready, busy;
  logic [MSG_W-1:0] bc_data, out_data;
  int checks = 0, failures = 0;
  bit always_ready = 0;

  hfint_pe dut (.clk, .rst_n, .axi_req(m_req), .axi_resp(m_resp), .bc_valid, .bc_ready,
                .bc_data, .out_valid, .out_ready, .out_data, .busy);

  `include "axil_master_tasks.svh"
  `include "af_ref_funcs.svh"

  logic [N_BITS-1:0] W [64][64];   // [row][col]
  logic [N_BITS-1:0] X [64];
  logic [N_BITS-1:0] got [64];
  int n_got;
  int any_clip;

  always @(negedge clk) out_ready = always_ready ? 1'b1 : (($urandom % 3) == 0);

  always @(posedge clk) if (out_valid && out_ready) begin
    for (int l = 0; l < VEC; l++) got[(int'(out_data[ROW_W +: MSG_ADDR_W]) - 100) * VEC + l] = out_data[l*N_BITS +: N_BITS];
    n_got++;
  end

  task automatic reg_wr(int idx, int val);
    logic [1:0] r;
    axil_write(32'(idx * 4), 32'(val), r);
  endtask

  task automatic run(int nc, int ng, int wb, int ab, int ob, int mode, int wbase, int ibase,
                     bit by_ctrl, bit fast);
    logic [1:0] r;
    logic [31:0] d;
    int t0, t1;
    // random operands: weights and inputs with exponent fields spread out
    for (int i = 0; i < ng * VEC; i++) for (int j = 0; j < nc * VEC; j++) W[i][j] = N_BITS'($urandom);
    for (int j = 0; j < nc * VEC; j++) X[j] = N_BITS'($urandom);
    reg_wr(2, wb); reg_wr(3, ab); reg_wr(4, ob); reg_wr(5, mode);
    reg_wr(6, nc); reg_wr(7, ng); reg_wr(8, wbase); reg_wr(9, ibase); reg_wr(10, 100);
    reg_wr(11, by_ctrl ? 0 : 1);
    // weight rows: row wbase + g*nc + c, lane l, element k = W[g*VEC+l][c*VEC+k]
    for (int g = 0; g < ng; g++) for (int c = 0; c < nc; c++)
      for (int wd = 0; wd < VEC * VEC / 4; wd++) begin
        logic [31:0] word;
        for (int b = 0; b < 4; b++) begin
          int e = wd * 4 + b;
          word[b*8 +: 8] = W[g*VEC + e / VEC][c*VEC + e % VEC];
        end
        axil_write(32'h0020_0000 | 32'((wbase + g * nc + c) * 256 + wd * 4), word, r);
      end
    n_got = 0;
    always_ready = fast;
    // inputs over the broadcast port, last beat starts the pass (AUTO_RUN)
    for (int c = 0; c < nc; c++) begin
      @(negedge clk);
      bc_valid = 1;
      for (int k = 0; k < VEC; k++) bc_data[k*N_BITS +: N_BITS] = X[c*VEC + k];
      bc_data[ROW_W +: MSG_ADDR_W] = MSG_ADDR_W'(ibase + c);
      bc_data[MSG_W-1] = (c == nc - 1) && !by_ctrl;
      do @(posedge clk); while (!bc_ready);
    end
    @(negedge clk); bc_valid = 0;
    if (by_ctrl) reg_wr(0, 1);
    t0 = $time;
    while (n_got < ng) @(posedge clk);
    t1 = $time;
    wait (!busy);
    // compare
    for (int i = 0; i < ng * VEC; i++) begin
      real dot = 0.0;
      bit clip;
      logic [N_BITS-1:0] e;
      for (int j = 0; j < nc * VEC; j++) dot += af_decode(W[i][j], wb) * af_decode(X[j], ab);
      e = pe_ref(dot, mode, ob, clip);
      any_clip += clip;
      checks++;
      if (got[i] !== e) begin
        failures++; $display("FAIL row %0d got %h exp %h (dot %f)", i, got[i], e, dot);
      end
    end
    if (fast && !by_ctrl) begin
      // last beat at t0-10ns..: pass = ng*nc + 3 cycles from start to last output
      checks++;
      if ((t1 - t0) / 10 > ng * nc + 4) begin
        failures++; $display("FAIL throughput: %0d cycles for %0d chunks", (t1 - t0) / 10, ng * nc);
      end
    end
    always_ready = 0;
  endtask

  initial begin
    #5000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] r;
    logic [31:0] d;
    m_req = '0; bc_valid = 0; bc_data = '0; any_clip = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(3, 2, 6, 5, 4, 0, 5, 2, 0, 0);
    run(2, 3, 9, 7, 5, 2, 40, 10, 1, 0);
    run(4, 2, 10, 8, 6, 3, 0, 0, 0, 1);
    run(1, 1, 9, 7, 3, 1, 4095, 255, 0, 1);
    axil_read(32'd4 * 1, d, r);   // STATUS
    checks++; if (d[1] != 1'b1) begin failures++; $display("FAIL done flag"); end
    checks++; if ((d[3] == 1'b1) != (any_clip > 0)) begin failures++; $display("FAIL clip flag %b %0d", d, any_clip); end
    axil_read(32'd4 * 12, d, r);
    checks++; if (d != 4) begin failures++; $display("FAIL pass count %0d", d); end
    axil_read(32'd4 * 13, d, r);
    checks++; if (d == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("stalls=%0d clipped=%0d", d, any_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
