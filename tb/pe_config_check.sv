// pe_config_check: drives one HFINT PE of a given operand width, exponent
// width and vector size, and checks it against a real-arithmetic model.
// Used by tb_pe_configs to cover the PE design points other than the
// default one.
//
// It owns the PE's AXI master, broadcast and output ports.  Two passes:
//   1. inputs arrive as broadcast beats, the beat marked last starts the
//      pass (AUTO_RUN); the crossbar side is always ready, so the pass must
//      finish in NUM_GROUPS*NUM_CHUNKS + 3 cycles;
//   2. inputs are written over AXI into the input buffer and the pass is
//      started through CTRL, with a randomly stalling crossbar side.
// Every output element is compared with decode -> dot product -> floor to
// the n-bit integer grid -> clip -> activation -> AdaptivFloat encode.
// Interface: clk, rst_n in; checks and failures counted so far, and done
// when both passes are over.  Parameters: NB operand bits, NE exponent bits,
// V vector size, FR fraction bits of the PE's n-bit integer.
module pe_config_check #(
  parameter int unsigned NB = 8,
  parameter int unsigned NE = 3,
  parameter int unsigned V  = 8,
  parameter int unsigned FR = 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  import adaptivfloat_pkg::axil_req_t;
  import adaptivfloat_pkg::axil_resp_t;
  import adaptivfloat_pkg::MSG_ADDR_W;
  import adaptivfloat_pkg::act_mode_e;

  // names used by the reference functions
  localparam int unsigned N_BITS   = NB;
  localparam int unsigned N_EXP    = NE;
  localparam int unsigned N_MANT   = NB - NE - 1;
  localparam int unsigned INT_FRAC = FR;

  localparam int unsigned ACCW   = 2 * ((1 << NE) - 1) + 2 * N_MANT + 8;   // H = 256
  localparam int unsigned RW     = V * NB;
  localparam int unsigned WRW    = V * RW;
  localparam int unsigned MW     = MSG_ADDR_W + RW + 1;
  localparam int unsigned EPW    = 32 / NB;                   // elements per AXI word
  localparam int unsigned WB_OFF = $clog2(WRW / 8);
  localparam int unsigned IB_OFF = (RW < 32) ? 2 : $clog2(RW / 8);
  localparam int unsigned IWORDS = (RW < 32) ? 1 : RW / 32;
  localparam int MAXR = 64;

  axil_req_t  m_req;
  axil_resp_t m_resp;
  logic bc_valid, bc_ready, out_valid, out_ready, busy;
  logic [MW-1:0] bc_data, out_data;
  bit always_ready;
  int n_got;
  longint cyc;

  hfint_pe #(.P_N_BITS(NB), .P_N_EXP(NE), .P_VEC(V), .P_ACC_W(ACCW), .P_INT_FRAC(FR)) dut (
    .clk, .rst_n, .axi_req(m_req), .axi_resp(m_resp), .bc_valid, .bc_ready, .bc_data,
    .out_valid, .out_ready, .out_data, .busy);

  `include "axil_master_tasks.svh"
  `include "af_ref_funcs.svh"

  logic [NB-1:0] W [MAXR][MAXR];
  logic [NB-1:0] X [MAXR];
  logic [NB-1:0] got [MAXR];

  always @(posedge clk) cyc <= rst_n ? cyc + 1 : 0;
  always @(negedge clk) out_ready = always_ready ? 1'b1 : (($urandom % 3) == 0);
  always @(posedge clk) if (out_valid && out_ready) begin
    for (int l = 0; l < V; l++)
      got[(int'(out_data[RW +: MSG_ADDR_W]) - 100) * V + l] = out_data[l*NB +: NB];
    n_got++;
  end

  task automatic reg_wr(int idx, int val);
    logic [1:0] r;
    axil_write(32'(idx * 4), 32'(val), r);
  endtask

  task automatic pass(int nc, int ng, int wb, int ab, int ob, int mode, bit by_axi);
    logic [1:0] r;
    longint t0, t1;
    for (int i = 0; i < ng * V; i++) for (int j = 0; j < nc * V; j++) W[i][j] = NB'($urandom);
    for (int j = 0; j < nc * V; j++) X[j] = NB'($urandom);
    reg_wr(2, wb); reg_wr(3, ab); reg_wr(4, ob); reg_wr(5, mode);
    reg_wr(6, nc); reg_wr(7, ng); reg_wr(8, 0); reg_wr(9, 0); reg_wr(10, 100);
    reg_wr(11, by_axi ? 0 : 1);
    // weight row g*nc + c: lane l, element k = W[g*V+l][c*V+k]
    for (int g = 0; g < ng; g++) for (int c = 0; c < nc; c++)
      for (int wd = 0; wd < int'(WRW / 32); wd++) begin
        logic [31:0] word;
        for (int b = 0; b < int'(EPW); b++) begin
          automatic int e = wd * EPW + b;
          word[b*NB +: NB] = W[g*V + e / V][c*V + e % V];
        end
        axil_write(32'h0020_0000 | 32'(((g * nc + c) << WB_OFF) + wd * 4), word, r);
      end
    n_got = 0;
    always_ready = !by_axi;
    if (by_axi) begin
      for (int c = 0; c < nc; c++) for (int wd = 0; wd < int'(IWORDS); wd++) begin
        logic [31:0] word = '0;
        for (int b = 0; b < int'(EPW) && wd * EPW + b < V; b++) word[b*NB +: NB] = X[c*V + wd*EPW + b];
        axil_write(32'h0010_0000 | 32'((c << IB_OFF) + wd * 4), word, r);
      end
      reg_wr(0, 1);
    end else begin
      for (int c = 0; c < nc; c++) begin
        @(negedge clk);
        bc_valid = 1;
        for (int k = 0; k < int'(V); k++) bc_data[k*NB +: NB] = X[c*V + k];
        bc_data[RW +: MSG_ADDR_W] = MSG_ADDR_W'(c);
        bc_data[MW-1] = (c == nc - 1);
        do @(posedge clk); while (!bc_ready);
      end
      @(negedge clk); bc_valid = 0;
    end
    t0 = cyc;
    while (n_got < ng) @(posedge clk);
    t1 = cyc;
    wait (!busy);
    for (int i = 0; i < ng * int'(V); i++) begin
      automatic real dot = 0.0;
      bit clip;
      logic [NB-1:0] e;
      for (int j = 0; j < nc * int'(V); j++) dot += af_decode(W[i][j], wb) * af_decode(X[j], ab);
      e = pe_ref(dot, mode, ob, clip);
      checks++;
      if (got[i] !== e) begin
        failures++;
        $display("FAIL <%0d,%0d> V=%0d row %0d got %h exp %h", NB, NE, V, i, got[i], e);
      end
    end
    if (!by_axi) begin
      checks++;
      if (t1 - t0 > longint'(ng * nc + 3)) begin
        failures++; $display("FAIL <%0d,%0d> V=%0d pass took %0d cycles", NB, NE, V, t1 - t0);
      end
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0; cyc = 0;
    m_req = '0; bc_valid = 0; bc_data = '0; always_ready = 1;
    wait (rst_n);
    repeat (2) @(posedge clk);
    if (NB >= 8) begin
      pass(3, 2, 6, 5, 4, 0, 0);
      pass(2, 3, 9, 7, 5, 2, 1);
    end else begin
      pass(3, 2, 4, 4, 2, 1, 0);
      pass(2, 3, 5, 3, 3, 3, 1);
    end
    done = 1;
  end
endmodule
