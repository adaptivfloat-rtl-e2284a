// hfint_pe: the hybrid float-integer (HFINT) processing element.
//
// What it computes: one matrix-vector product y = act(W x) per "pass", with
// W and x in AdaptivFloat<n,e> and y converted back to AdaptivFloat.  The
// weights stay in the PE (weight-stationary); the input vector arrives from
// the global buffer over the broadcast bus; each group of VEC results leaves
// over the crossbar as one row addressed to the global buffer.
//
// Datapath (the paper's PE figure): weight buffer and input/bias buffer ->
// VEC vector-MAC lanes (exponent add, mantissa multiply, shift, adder tree,
// integer accumulator) -> ">>" by |weight exp_bias| + |activation exp_bias|
// -> truncation to an n-bit integer -> activation function -> integer to
// AdaptivFloat with the output activation exp_bias.  The three exp_bias
// values sit in 4-bit registers.  Vector size = lane count = VEC.
//
// Schedule (this design's own; the paper gives no controller): a pass covers
// NUM_GROUPS groups of VEC output rows.  For group g and chunk c
// (c < NUM_CHUNKS = K/VEC) the PE reads weight row W_BASE + g*NUM_CHUNKS + c
// (lane l holds W[g*VEC+l][c*VEC +: VEC]) and input row IN_BASE + c (x[c*VEC
// +: VEC], shared by all lanes).  Pipeline: issue (buffer read) -> MAC
// (accumulate, clear on c = 0) -> post-process into the output register.
// One chunk per cycle, no bubble between groups, so a pass takes
// NUM_GROUPS*NUM_CHUNKS + 3 cycles when the crossbar keeps up.  If the output
// register is still full when a group finishes, the whole pipeline stalls
// (buffer outputs hold, MACs hold) until the crossbar takes it.
//
// Control is over AXI4-Lite (axil_slave).  Window offsets (byte address):
//   addr[21]    = 1: weight buffer, row = addr[8 +: 12], 32-bit word addr[7:2]
//   addr[21:20] = 01: input buffer, row = addr[4 +: 8], word addr[3:2]
//                 (field positions for the default row of 16 bytes; they
//                 follow the row size, and a row under 4 bytes takes one
//                 4-byte slot, of which the low bytes are used)
//   addr[21:20] = 00: registers, index addr[7:2]:
//     0 CTRL (W: bit0 start a pass, bit1 clear sticky flags)
//     1 STATUS (R: bit0 busy, bit1 a pass finished, bit2 accumulator
//       saturated, bit3 truncation clipped)
//     2 WBIAS  3 ABIAS_IN  4 ABIAS_OUT  (4 bits, exp_bias = -value)
//     5 ACT_MODE  6 NUM_CHUNKS  7 NUM_GROUPS  8 W_BASE  9 IN_BASE
//     10 OUT_BASE (GB row of group 0)  11 AUTO_RUN (bit0: start a pass when a
//     broadcast beat marked last arrives)  12 PASS_COUNT (R)
//     13 STALL_COUNT (R: cycles stalled on the crossbar)
// Buffers are write-only from AXI (reads return 0).  Broadcast beats are
// written into the input buffer row named in the beat; an AXI write to the
// input buffer in the same cycle holds the broadcast back for that cycle.
module hfint_pe
  import adaptivfloat_pkg::*;
#(
  parameter int unsigned P_N_BITS   = N_BITS,
  parameter int unsigned P_N_EXP    = N_EXP,
  parameter int unsigned P_VEC      = VEC,
  parameter int unsigned P_ACC_W    = ACC_W,
  parameter int unsigned P_INT_FRAC = INT_FRAC,
  parameter int unsigned P_WBUF     = WBUF_BYTES,
  parameter int unsigned P_IBUF     = IBUF_BYTES
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  axil_req_t                             axi_req,
  output axil_resp_t                            axi_resp,
  // broadcast bus in: {last, input-buffer row, row}
  input  logic                                  bc_valid,
  output logic                                  bc_ready,
  input  logic [MSG_ADDR_W+P_VEC*P_N_BITS:0]    bc_data,
  // crossbar out: {last group of pass, GB row, row}
  output logic                                  out_valid,
  input  logic                                  out_ready,
  output logic [MSG_ADDR_W+P_VEC*P_N_BITS:0]    out_data,
  output logic                                  busy
);
  localparam int unsigned RW      = P_VEC * P_N_BITS;           // input row
  localparam int unsigned WRW     = P_VEC * RW;                 // weight row
  localparam int unsigned W_ROWS  = P_WBUF / (WRW / 8);
  localparam int unsigned I_ROWS  = P_IBUF / (RW / 8);
  localparam int unsigned WA_W    = $clog2(W_ROWS);
  localparam int unsigned IA_W    = $clog2(I_ROWS);
  localparam int unsigned WB_OFF  = $clog2(WRW / 8);            // byte offset bits in a weight row
  // AXI view of an input row: at least one 32-bit word (narrow rows use the
  // low bits of a 4-byte slot)
  localparam int unsigned RWP     = (RW < 32) ? 32 : RW;
  localparam int unsigned IB_OFF  = $clog2(RWP / 8);

  // ---------------- AXI slave and registers ----------------
  regbus_req_t bus;
  logic        wr_ready, rd_ready;
  logic [31:0] rd_data;

  axil_slave u_axi (.clk, .rst_n, .axi_req, .axi_resp, .bus, .wr_ready, .rd_ready, .rd_data);

  logic [BIAS_W-1:0]     r_wbias, r_abias_in, r_abias_out;
  act_mode_e             r_act;
  logic [15:0]           r_chunks, r_groups;
  logic [WA_W-1:0]       r_wbase;
  logic [IA_W-1:0]       r_inbase;
  logic [MSG_ADDR_W-1:0] r_outbase;
  logic                  r_auto;
  logic                  st_done, st_ovf, st_sat;
  logic [31:0]           pass_cnt, stall_cnt;

  logic wr_is_w, wr_is_i, wr_is_reg;
  always_comb begin
    wr_is_w   = bus.wr_addr[21];
    wr_is_i   = bus.wr_addr[21:20] == 2'b01;
    wr_is_reg = bus.wr_addr[21:20] == 2'b00;
    wr_ready  = 1'b1;
    rd_ready  = 1'b1;
    bc_ready  = !(bus.wr_valid && wr_is_i);
  end

  // ---------------- buffers ----------------
  logic            wb_we, ib_we, rd_en;
  logic [WA_W-1:0] wb_waddr, wb_raddr;
  logic [IA_W-1:0] ib_waddr, ib_raddr;
  logic [WRW-1:0]  wb_wdata, wb_rdata;
  logic [WRW/8-1:0] wb_wmask;
  logic [RW-1:0]   ib_wdata, ib_rdata;
  logic [RW/8-1:0] ib_wmask;
  logic            bc_take;
  logic [RWP-1:0]  ib_wide_d;
  logic [RWP/8-1:0] ib_wide_m;

  always_comb begin
    wb_we    = bus.wr_valid && wr_is_w;
    wb_waddr = bus.wr_addr[WB_OFF +: WA_W];
    wb_wdata = {(WRW/32){bus.wr_data}};
    wb_wmask = (WRW/8)'(bus.wr_strb) << (4 * (bus.wr_addr[WB_OFF-1:0] >> 2));
    bc_take  = bc_valid && bc_ready;
    ib_we    = (bus.wr_valid && wr_is_i) || bc_take;
    if (bus.wr_valid && wr_is_i) begin
      ib_waddr = bus.wr_addr[IB_OFF +: IA_W];
      ib_wide_d = {(RWP/32){bus.wr_data}};
      ib_wide_m = (RWP/8)'(bus.wr_strb) << (4 * (bus.wr_addr[IB_OFF-1:0] >> 2));
      ib_wdata = ib_wide_d[RW-1:0];
      ib_wmask = ib_wide_m[RW/8-1:0];
    end else begin
      ib_waddr = IA_W'(bc_data[RW +: MSG_ADDR_W]);
      ib_wdata = bc_data[RW-1:0];
      ib_wmask = '1;
      ib_wide_d = '0;
      ib_wide_m = '0;
    end
  end

  weight_buffer #(.BYTES(P_WBUF), .ROW_W(WRW)) u_wbuf (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata), .wmask(wb_wmask),
    .rd_en, .raddr(wb_raddr), .rdata(wb_rdata));

  input_buffer #(.BYTES(P_IBUF), .ROW_W(RW)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata), .wmask(ib_wmask),
    .rd_en, .raddr(ib_raddr), .rdata(ib_rdata));

  // ---------------- pass sequencer ----------------
  logic        issuing, stall, start;
  logic [15:0] g, c;
  logic        s1_valid, s1_clear, s1_last;
  logic [15:0] s1_group;
  logic        s2_valid;
  logic [15:0] s2_group;
  logic        pass_last_grp;

  always_comb begin
    start    = (bus.wr_valid && wr_is_reg && bus.wr_addr[7:2] == 6'd0 && bus.wr_data[0])
            || (r_auto && bc_take && bc_data[RW + MSG_ADDR_W]);
    stall    = s2_valid && out_valid && !out_ready;
    rd_en    = issuing && !stall;
    wb_raddr = WA_W'(32'(r_wbase) + 32'(g) * 32'(r_chunks) + 32'(c));
    ib_raddr = IA_W'(32'(r_inbase) + 32'(c));
  end

  // ---------------- vector MAC lanes and post-processing ----------------
  logic signed [P_ACC_W-1:0] acc [P_VEC];
  logic [P_VEC-1:0]          ovf, sat;
  logic [RW-1:0]             y_row;

  for (genvar l = 0; l < P_VEC; l++) begin : g_lane
    logic signed [P_N_BITS-1:0] q, qa;
    hfint_vector_mac #(.N_BITS(P_N_BITS), .N_EXP(P_N_EXP), .VEC(P_VEC), .ACC_W(P_ACC_W)) u_mac (
      .clk, .rst_n, .en(s1_valid && !stall), .clear(s1_clear),
      .w_vec(wb_rdata[l*RW +: RW]), .a_vec(ib_rdata), .acc(acc[l]), .ovf(ovf[l]));
    hfint_shift_trunc #(.N_BITS(P_N_BITS), .N_EXP(P_N_EXP), .ACC_W(P_ACC_W), .BIAS_W(BIAS_W),
                        .INT_FRAC(P_INT_FRAC)) u_shift (
      .acc(acc[l]), .wbias_mag(r_wbias), .abias_mag(r_abias_in), .q(q), .sat(sat[l]));
    hfint_activation #(.N_BITS(P_N_BITS), .INT_FRAC(P_INT_FRAC)) u_act (
      .mode(r_act), .x(q), .y(qa));
    int_to_adaptivfloat #(.N_BITS(P_N_BITS), .N_EXP(P_N_EXP), .BIAS_W(BIAS_W),
                          .INT_FRAC(P_INT_FRAC)) u_i2f (
      .q(qa), .bias_mag(r_abias_out), .f(y_row[l*P_N_BITS +: P_N_BITS]));
  end

  assign pass_last_grp = (s2_group == r_groups - 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_wbias <= '0; r_abias_in <= '0; r_abias_out <= '0; r_act <= ACT_NONE;
      r_chunks <= 16'd1; r_groups <= 16'd1; r_wbase <= '0; r_inbase <= '0;
      r_outbase <= '0; r_auto <= 1'b0;
      st_done <= 1'b0; st_ovf <= 1'b0; st_sat <= 1'b0;
      pass_cnt <= '0; stall_cnt <= '0;
      busy <= 1'b0; issuing <= 1'b0; g <= '0; c <= '0;
      s1_valid <= 1'b0; s1_clear <= 1'b0; s1_last <= 1'b0; s1_group <= '0;
      s2_valid <= 1'b0; s2_group <= '0;
      out_valid <= 1'b0; out_data <= '0;
      rd_data <= '0;
    end else begin
      // register writes
      if (bus.wr_valid && wr_is_reg) begin
        unique case (bus.wr_addr[7:2])
          6'd0:  if (bus.wr_data[1]) begin st_done <= 1'b0; st_ovf <= 1'b0; st_sat <= 1'b0; end
          6'd2:  r_wbias     <= bus.wr_data[BIAS_W-1:0];
          6'd3:  r_abias_in  <= bus.wr_data[BIAS_W-1:0];
          6'd4:  r_abias_out <= bus.wr_data[BIAS_W-1:0];
          6'd5:  r_act       <= act_mode_e'(bus.wr_data[1:0]);
          6'd6:  r_chunks    <= bus.wr_data[15:0];
          6'd7:  r_groups    <= bus.wr_data[15:0];
          6'd8:  r_wbase     <= bus.wr_data[WA_W-1:0];
          6'd9:  r_inbase    <= bus.wr_data[IA_W-1:0];
          6'd10: r_outbase   <= bus.wr_data[MSG_ADDR_W-1:0];
          6'd11: r_auto      <= bus.wr_data[0];
          default: ;
        endcase
      end
      // register reads (data one cycle after acceptance)
      if (bus.rd_valid) begin
        rd_data <= '0;
        if (bus.rd_addr[21:20] == 2'b00) begin
          unique case (bus.rd_addr[7:2])
            6'd1:  rd_data <= {28'd0, st_sat, st_ovf, st_done, busy};
            6'd2:  rd_data <= 32'(r_wbias);
            6'd3:  rd_data <= 32'(r_abias_in);
            6'd4:  rd_data <= 32'(r_abias_out);
            6'd5:  rd_data <= 32'(r_act);
            6'd6:  rd_data <= 32'(r_chunks);
            6'd7:  rd_data <= 32'(r_groups);
            6'd8:  rd_data <= 32'(r_wbase);
            6'd9:  rd_data <= 32'(r_inbase);
            6'd10: rd_data <= 32'(r_outbase);
            6'd11: rd_data <= 32'(r_auto);
            6'd12: rd_data <= pass_cnt;
            6'd13: rd_data <= stall_cnt;
            default: rd_data <= '0;
          endcase
        end
      end

      // start of a pass
      if (start && !busy) begin
        busy <= 1'b1; issuing <= 1'b1; g <= '0; c <= '0;
      end

      if (stall) stall_cnt <= stall_cnt + 1;

      if (!stall) begin
        // issue stage
        s1_valid <= issuing;
        s1_clear <= (c == 16'd0);
        s1_last  <= (c == r_chunks - 16'd1);
        s1_group <= g;
        if (issuing) begin
          if (c == r_chunks - 16'd1) begin
            c <= '0;
            if (g == r_groups - 16'd1) issuing <= 1'b0;
            else                       g <= g + 16'd1;
          end else begin
            c <= c + 16'd1;
          end
        end
        // MAC stage -> post-process stage
        s2_valid <= s1_valid && s1_last;
        s2_group <= s1_group;
        // output register
        if (s2_valid) begin
          out_valid <= 1'b1;
          out_data  <= {pass_last_grp, MSG_ADDR_W'(r_outbase + s2_group), y_row};
          if (|sat) st_sat <= 1'b1;
          if (|ovf) st_ovf <= 1'b1;
        end else if (out_ready) begin
          out_valid <= 1'b0;
        end
      end

      // end of pass
      if (busy && !issuing && !s1_valid && !s2_valid && !(start && !busy)) begin
        busy     <= 1'b0;
        st_done  <= 1'b1;
        pass_cnt <= pass_cnt + 1;
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
