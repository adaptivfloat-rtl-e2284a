// tb_hfint_accel_top: end-to-end test of the accelerator at its default
// parameters (4 PEs, vector size 16, AdaptivFloat<8,3>, 1 MB weight buffers,
// 4 KB input buffers, 1 MB GB), driven only through the host AXI4-Lite port
// and the interrupt.
//
// Run A (one fully connected layer): a 16-element input in the GB is
// broadcast, each PE computes 32 of the 128 outputs (NUM_CHUNKS = 1,
// NUM_GROUPS = 2), small exp_bias values make some sums clip, and the four
// PEs finish groups in the same cycles, so the crossbar arbitrates and PEs
// stall on it.
// Run B (a recurrent layer, 3 time steps): h(t+1) = hardtanh(W h(t)) with a
// 64x64 W split by rows over the four PEs (16 rows each); the PEs write
// h(t+1) over the GB rows that the GB broadcasts in the next step.
// Every output element is compared with a real-arithmetic reference.  The
// test counts how often each mechanism happened - crossbar arbitration
// between PEs, PE stalls on the crossbar, truncation clips, time steps,
// interrupts - and fails if one never did.
module tb_hfint_accel_top;
  import adaptivfloat_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t  m_req;
  axil_resp_t m_resp;
  logic irq;
  logic [NUM_PE-1:0] pe_busy;
  int checks = 0, failures = 0;
  int n_arb = 0, n_stall = 0, n_clip = 0, n_steps = 0, n_irq = 0;

  hfint_accel_top dut (
    .clk, .rst_n,
    .s_axi_awvalid(m_req.awvalid), .s_axi_awready(m_resp.awready), .s_axi_awaddr(m_req.awaddr),
    .s_axi_wvalid(m_req.wvalid), .s_axi_wready(m_resp.wready), .s_axi_wdata(m_req.wdata),
    .s_axi_wstrb(m_req.wstrb), .s_axi_bvalid(m_resp.bvalid), .s_axi_bready(m_req.bready),
    .s_axi_bresp(m_resp.bresp), .s_axi_arvalid(m_req.arvalid), .s_axi_arready(m_resp.arready),
    .s_axi_araddr(m_req.araddr), .s_axi_rvalid(m_resp.rvalid), .s_axi_rready(m_req.rready),
    .s_axi_rdata(m_resp.rdata), .s_axi_rresp(m_resp.rresp), .irq, .pe_busy);

  `include "axil_master_tasks.svh"
  `include "af_ref_funcs.svh"

  localparam logic [31:0] GB = 32'(NUM_PE) << SLV_SEL_LSB;

  // arbitration: more than one PE offering a row in the same cycle
  always @(posedge clk) if (rst_n && $countones(dut.x_valid) > 1) n_arb++;

  logic [N_BITS-1:0] W [128][64];
  logic [N_BITS-1:0] X [64];
  logic [N_BITS-1:0] Y [128];

  task automatic wr(logic [31:0] a, int v);
    logic [1:0] r;
    axil_write(a, 32'(v), r);
    if (r != 2'b00) begin failures++; $display("FAIL bresp at %h", a); end
  endtask

  task automatic rd(logic [31:0] a, output logic [31:0] d);
    logic [1:0] r;
    axil_read(a, d, r);
  endtask

  function automatic logic [31:0] pe_base(int p);
    return 32'(p) << SLV_SEL_LSB;
  endfunction

  // PE p owns output rows [p*ng*VEC, (p+1)*ng*VEC); its weight row (g, c)
  // holds, lane l, element k = W[p*ng*VEC + g*VEC + l][c*VEC + k]
  task automatic load_weights(int nc, int ng);
    for (int p = 0; p < NUM_PE; p++)
      for (int g = 0; g < ng; g++) for (int c = 0; c < nc; c++)
        for (int wd = 0; wd < VEC * VEC / 4; wd++) begin
          logic [31:0] word;
          for (int b = 0; b < 4; b++) begin
            int e = wd * 4 + b;
            word[b*8 +: 8] = W[p*ng*VEC + g*VEC + e / VEC][c*VEC + e % VEC];
          end
          wr(pe_base(p) | 32'h0020_0000 | 32'((g * nc + c) * 256 + wd * 4), int'(word));
        end
  endtask

  task automatic setup_pes(int nc, int ng, int wb, int ab, int ob, int mode, int outbase);
    for (int p = 0; p < NUM_PE; p++) begin
      wr(pe_base(p) | 32'd0, 2);               // clear sticky flags
      wr(pe_base(p) | 32'(2 * 4), wb);  wr(pe_base(p) | 32'(3 * 4), ab);
      wr(pe_base(p) | 32'(4 * 4), ob);  wr(pe_base(p) | 32'(5 * 4), mode);
      wr(pe_base(p) | 32'(6 * 4), nc);  wr(pe_base(p) | 32'(7 * 4), ng);
      wr(pe_base(p) | 32'(8 * 4), 0);   wr(pe_base(p) | 32'(9 * 4), 0);
      wr(pe_base(p) | 32'(10 * 4), outbase + p * ng);
      wr(pe_base(p) | 32'(11 * 4), 1);
    end
  endtask

  task automatic gb_write_vec(int row0, int n, logic [N_BITS-1:0] v [64]);
    for (int r = 0; r < n / VEC; r++) for (int w = 0; w < ROW_W / 32; w++) begin
      logic [31:0] word;
      for (int b = 0; b < 4; b++) word[b*8 +: 8] = v[r*VEC + w*4 + b];
      wr(GB | 32'h0020_0000 | 32'((row0 + r) * (ROW_W / 8) + w * 4), int'(word));
    end
  endtask

  task automatic gb_run(int bc_base, int bc_len, int expect_rows, int steps);
    logic [31:0] d;
    wr(GB | 32'(2 * 4), bc_base); wr(GB | 32'(3 * 4), bc_len); wr(GB | 32'(4 * 4), 0);
    wr(GB | 32'(5 * 4), expect_rows); wr(GB | 32'(6 * 4), steps); wr(GB | 32'(7 * 4), 1);
    wr(GB | 32'd0, 1);
    for (int w = 0; w < 20000 && !irq; w++) @(posedge clk);
    checks++;
    if (irq) n_irq++;
    else begin failures++; $display("FAIL no interrupt"); end
    rd(GB | 32'(8 * 4), d);
    n_steps += int'(d);
    checks++; if (d != 32'(steps)) begin failures++; $display("FAIL steps %0d", d); end
    wr(GB | 32'(1 * 4), 2);
  endtask

  task automatic check_rows(int row0, int n, logic [N_BITS-1:0] e [128]);
    logic [31:0] d;
    for (int i = 0; i < n; i += 4) begin
      rd(GB | 32'h0020_0000 | 32'(row0 * (ROW_W / 8) + i), d);
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (d[b*8 +: 8] !== e[i + b]) begin
          failures++; $display("FAIL out %0d got %h exp %h", i + b, d[b*8 +: 8], e[i + b]);
        end
      end
    end
  endtask

  task automatic collect_pe_stats();
    logic [31:0] d;
    for (int p = 0; p < NUM_PE; p++) begin
      rd(pe_base(p) | 32'(13 * 4), d); n_stall += int'(d);
      rd(pe_base(p) | 32'(1 * 4), d);  n_clip  += int'(d[3]);
    end
  endtask

  initial begin
    #1000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    m_req = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---------------- run A: 16 -> 128 fully connected ----------------
    for (int i = 0; i < 128; i++) for (int j = 0; j < 16; j++) W[i][j] = N_BITS'($urandom);
    for (int j = 0; j < 16; j++) X[j] = N_BITS'($urandom);
    load_weights(1, 2);
    setup_pes(1, 2, 4, 3, 2, 0, 1000);
    gb_write_vec(10, 16, X);
    gb_run(10, 1, 8, 1);
    for (int i = 0; i < 128; i++) begin
      automatic real dot = 0.0;
      bit clip;
      for (int j = 0; j < 16; j++) dot += af_decode(W[i][j], 4) * af_decode(X[j], 3);
      Y[i] = pe_ref(dot, 0, 2, clip);
    end
    check_rows(1000, 128, Y);
    collect_pe_stats();

    // ---------------- run B: 64 -> 64 recurrent, 3 steps ----------------
    for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) W[i][j] = N_BITS'($urandom);
    for (int j = 0; j < 64; j++) X[j] = N_BITS'($urandom);
    load_weights(4, 1);
    setup_pes(4, 1, 9, 5, 5, 2, 20);
    gb_write_vec(20, 64, X);
    gb_run(20, 4, 4, 3);
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < 64; i++) begin
        automatic real dot = 0.0;
        bit clip;
        for (int j = 0; j < 64; j++) dot += af_decode(W[i][j], 9) * af_decode(X[j], 5);
        Y[i] = pe_ref(dot, 2, 5, clip);
      end
      for (int j = 0; j < 64; j++) X[j] = Y[j];
    end
    check_rows(20, 64, Y);

    $display("mechanisms: arbitration=%0d pe_stall_cycles=%0d clipping_pes=%0d steps=%0d irqs=%0d",
             n_arb, n_stall, n_clip, n_steps, n_irq);
    checks++; if (n_arb == 0)   begin failures++; $display("FAIL no crossbar arbitration"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no PE stall"); end
    checks++; if (n_clip == 0)  begin failures++; $display("FAIL no truncation clip"); end
    checks++; if (n_steps < 4)  begin failures++; $display("FAIL too few time steps"); end
    checks++; if (n_irq != 2)   begin failures++; $display("FAIL irq count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
