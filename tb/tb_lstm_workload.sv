// tb_lstm_workload: the accelerator's target workload, an LSTM layer with
// 256 hidden units run for 100 time steps, on the accelerator at its default
// parameters (4 PEs, vector size 16, AdaptivFloat<8,3>).
//
// Mapping (weight-stationary): PE p holds the weights of gate p (input,
// forget, cell candidate, output) for all 256 hidden units: a 256 x 528
// matrix over the 512-element vector [x(t); h(t)] plus one bias chunk, i.e.
// NUM_CHUNKS = 33 and NUM_GROUPS = 16, 130 KB of its 1 MB weight buffer.
// The bias chunk multiplies an input row holding the constant 1.0 in
// element 0.  Each PE's activation register gives its gate function: hard
// sigmoid for the three gates, hard tanh for the cell candidate.
//
// Each time step the testbench, acting as the host, writes x(t) and h(t)
// into the global buffer and starts a one-step GB run.  The GB broadcasts
// the 33 input rows, the four PEs compute their gates in parallel and send
// 64 rows of gate values back through the crossbar, and the GB raises its
// interrupt.  The host reads the gates, checks every one of the 1024
// values against a real-arithmetic model, and performs the elementwise cell
// update c = f*c + i*g, h = o*hardtanh(c) itself, since the accelerator has
// no unit for it.  h is quantised back to AdaptivFloat for the next step.
//
// Timing checks: the accelerator part of each step (GB start to interrupt)
// must take at least the 16*33 = 528 compute cycles and at most 600, and
// the 100 steps together must stay within 81,200 cycles (81.2 us at 1 GHz,
// the compute time reported for this workload, which also covers work this
// test leaves to the host).  Crossbar arbitration (all four PEs finish a
// group in the same cycle) is counted and must occur; PE stall cycles are
// reported.
module tb_lstm_workload;
  import adaptivfloat_pkg::*;
  localparam int HID = 256, INP = 256, K = HID + INP, NC = K / VEC + 1, NG = HID / VEC;
  localparam int STEPS = 100;
  localparam int WB = 8, AB = 7, OB = 7;       // exp_bias magnitudes
  localparam int OUT_ROW = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t  m_req;
  axil_resp_t m_resp;
  logic irq;
  logic [NUM_PE-1:0] pe_busy;
  int checks = 0, failures = 0;
  int n_arb = 0, n_stall = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

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

  always @(posedge clk) if (rst_n && $countones(dut.x_valid) > 1) n_arb++;

  // gate weights: Wq[p][r][k], k < K multiplies [x; h], k = K is the bias
  logic [N_BITS-1:0] Wq [NUM_PE][HID][NC*VEC];
  real               Wd [NUM_PE][HID][NC*VEC];
  logic [N_BITS-1:0] xin [NC*VEC];              // the broadcast vector
  real               c_state [HID];
  logic [N_BITS-1:0] gate [NUM_PE][HID];
  localparam logic [N_BITS-1:0] ONE = {1'b0, N_EXP'(AB), N_MANT'(0)};   // 1.0 at bias -AB

  task automatic wr(logic [31:0] a, logic [31:0] v);
    logic [1:0] r;
    axil_write(a, v, r);
    if (r != 2'b00) begin failures++; $display("FAIL bresp at %h", a); end
  endtask

  task automatic rd(logic [31:0] a, output logic [31:0] d);
    logic [1:0] r;
    axil_read(a, d, r);
  endtask

  function automatic logic [31:0] pe_base(int p);
    return 32'(p) << SLV_SEL_LSB;
  endfunction

  // write GB rows [row0, row0+n) from xin[first ...]
  task automatic gb_write_rows(int row0, int n, int first);
    for (int r = 0; r < n; r++) for (int w = 0; w < ROW_W / 32; w++) begin
      logic [31:0] word;
      for (int b = 0; b < 4; b++) word[b*8 +: 8] = xin[first + r*VEC + w*4 + b];
      wr(GB | 32'h0020_0000 | 32'((row0 + r) * (ROW_W / 8) + w * 4), word);
    end
  endtask

  // uniformly random AdaptivFloat word (the zero code included)
  function automatic logic [N_BITS-1:0] rnd_af();
    return N_BITS'($urandom);
  endfunction

  initial begin
    #15000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint t0, acc_cycles, step_cycles, max_step, min_step;
    m_req = '0;
    acc_cycles = 0; max_step = 0; min_step = 1 << 30;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- weights ----
    for (int p = 0; p < NUM_PE; p++) for (int r = 0; r < HID; r++)
      for (int k = 0; k < NC * VEC; k++) begin
        Wq[p][r][k] = (k < K + 1) ? rnd_af() : '0;   // unused tail of the bias chunk is 0
        Wd[p][r][k] = af_decode(Wq[p][r][k], WB);
      end
    for (int p = 0; p < NUM_PE; p++)
      for (int g = 0; g < NG; g++) for (int c = 0; c < NC; c++)
        for (int wd = 0; wd < VEC * VEC / 4; wd++) begin
          logic [31:0] word;
          for (int b = 0; b < 4; b++) begin
            automatic int e = wd * 4 + b;
            word[b*8 +: 8] = Wq[p][g*VEC + e / VEC][c*VEC + e % VEC];
          end
          wr(pe_base(p) | 32'h0020_0000 | 32'((g * NC + c) * 256 + wd * 4), word);
        end
    $display("weights loaded at cycle %0d", cyc);

    // ---- PE registers: gate p on PE p ----
    for (int p = 0; p < NUM_PE; p++) begin
      wr(pe_base(p) | 32'(2 * 4), WB);  wr(pe_base(p) | 32'(3 * 4), AB);
      wr(pe_base(p) | 32'(4 * 4), OB);
      wr(pe_base(p) | 32'(5 * 4), (p == 2) ? int'(ACT_HARDTANH) : int'(ACT_HARDSIG));
      wr(pe_base(p) | 32'(6 * 4), NC);  wr(pe_base(p) | 32'(7 * 4), NG);
      wr(pe_base(p) | 32'(8 * 4), 0);   wr(pe_base(p) | 32'(9 * 4), 0);
      wr(pe_base(p) | 32'(10 * 4), OUT_ROW + p * NG);
      wr(pe_base(p) | 32'(11 * 4), 1);
    end
    // ---- GB: broadcast rows 0..NC-1 to input rows 0..NC-1, expect 64 rows ----
    wr(GB | 32'(2 * 4), 0); wr(GB | 32'(3 * 4), NC); wr(GB | 32'(4 * 4), 0);
    wr(GB | 32'(5 * 4), NUM_PE * NG); wr(GB | 32'(6 * 4), 1); wr(GB | 32'(7 * 4), 1);

    // ---- initial state, bias row ----
    for (int k = 0; k < NC * VEC; k++) xin[k] = '0;
    xin[K] = ONE;
    for (int j = 0; j < HID; j++) c_state[j] = 0.0;
    gb_write_rows(INP / VEC, HID / VEC + 1, INP);   // h(0) = 0 and the bias row

    for (int t = 0; t < STEPS; t++) begin
      // x(t): random inputs; h(t) is already in xin[INP +: HID]
      for (int k = 0; k < INP; k++) xin[k] = rnd_af();
      gb_write_rows(0, INP / VEC, 0);

      t0 = cyc;
      wr(GB | 32'd0, 1);
      for (int w = 0; w < 5000 && !irq; w++) @(posedge clk);
      checks++;
      if (!irq) begin failures++; $display("FAIL no interrupt in step %0d", t); end
      step_cycles = cyc - t0;
      acc_cycles += step_cycles;
      if (step_cycles > max_step) max_step = step_cycles;
      if (step_cycles < min_step) min_step = step_cycles;
      wr(GB | 32'(1 * 4), 2);

      // read the 64 gate rows and check each value
      for (int p = 0; p < NUM_PE; p++)
        for (int i = 0; i < HID; i += 4) begin
          logic [31:0] d;
          rd(GB | 32'h0020_0000 | 32'((OUT_ROW + p * NG) * (ROW_W / 8) + i), d);
          for (int b = 0; b < 4; b++) gate[p][i + b] = d[b*8 +: 8];
        end
      for (int p = 0; p < NUM_PE; p++)
        for (int r = 0; r < HID; r++) begin
          automatic real dot = 0.0;
          automatic int  mode = (p == 2) ? 2 : 3;
          bit clip;
          logic [N_BITS-1:0] e;
          for (int k = 0; k < K + 1; k++) dot += Wd[p][r][k] * af_decode(xin[k], AB);
          e = pe_ref(dot, mode, OB, clip);
          checks++;
          if (gate[p][r] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d gate %0d row %0d got %h exp %h", t, p, r, gate[p][r], e);
          end
        end

      // host: elementwise LSTM cell update, h(t+1) written back into the GB
      for (int j = 0; j < HID; j++) begin
        automatic real ig = af_decode(gate[0][j], OB), fg = af_decode(gate[1][j], OB);
        automatic real gg = af_decode(gate[2][j], OB), og = af_decode(gate[3][j], OB);
        automatic real hc;
        c_state[j] = fg * c_state[j] + ig * gg;
        hc = c_state[j] > 1.0 ? 1.0 : (c_state[j] < -1.0 ? -1.0 : c_state[j]);
        xin[INP + j] = af_encode(og * hc, AB);
      end
      gb_write_rows(INP / VEC, HID / VEC, INP);
    end

    for (int p = 0; p < NUM_PE; p++) begin
      logic [31:0] d;
      rd(pe_base(p) | 32'(13 * 4), d); n_stall += int'(d);
    end
    $display("LSTM %0d steps: accelerator cycles per step min=%0d max=%0d total=%0d",
             STEPS, min_step, max_step, acc_cycles);
    $display("mechanisms: arbitration=%0d pe_stall_cycles=%0d", n_arb, n_stall);
    checks++; if (min_step < NG * NC) begin failures++; $display("FAIL step faster than compute"); end
    checks++; if (max_step > 600) begin failures++; $display("FAIL step too slow"); end
    checks++; if (acc_cycles > 81200) begin failures++; $display("FAIL total over 81.2 us"); end
    checks++; if (n_arb == 0) begin failures++; $display("FAIL no arbitration"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
