// global_buffer: the global buffer (GB) of the accelerator.  It collects the
// activation rows that the PEs send over the arbitrated crossbar and
// broadcasts rows back to all PEs over the streaming bus, so that they can
// process the next time step or the next layer; when a run is over it raises
// the interrupt line.  Storage (1 MB), the collect/broadcast role and the IRQ
// follow the paper; the sequencing below is this design's own.
//
// Storage: GB_BYTES as rows of VEC AdaptivFloat words (65536 x 128 bits by
// default), one write port and one read port (written as an array).
//
// Sequencing: a run of STEPS time steps is started by writing CTRL.  Each
// step is
//   BCAST   - stream rows BC_BASE .. BC_BASE+BC_LEN-1 onto the broadcast bus
//             as {last, BC_DST + i, row}; the final beat carries last = 1,
//             which starts the PEs (AUTO_RUN);
//   COLLECT - write every crossbar message {last, row, data} into GB row
//             `row`, and wait until EXPECT rows have arrived in this step.
// After the last step the GB sets DONE and, if IRQ_EN, drives irq high until
// software clears DONE.  Rows that arrive while broadcasting are stored and
// counted too.  The broadcast reads one row per cycle when the bus keeps up.
// The GB counts rows instead of looking at the PEs' "last group" flag, so
// that bit of rx_data is not used (lint reports it as an unused bit).
//
// AXI window offsets (byte address):
//   addr[21] = 1: GB rows, row = addr[4 +: 16], 32-bit word addr[3:2]
//               (read and write; a read waits while a broadcast is running,
//               a write waits while a crossbar row is being written)
//   addr[21] = 0: registers, index addr[7:2]:
//     0 CTRL (W: bit0 start a run)  1 STATUS (R: bit0 busy, bit1 DONE;
//     W: bit1 = 1 clears DONE)  2 BC_BASE  3 BC_LEN  4 BC_DST  5 EXPECT
//     6 STEPS  7 IRQ_EN  8 STEP_COUNT (R)  9 RX_COUNT (R, rows received)
module global_buffer
  import adaptivfloat_pkg::*;
#(
  parameter int unsigned P_ROW_W = ROW_W,
  parameter int unsigned P_BYTES = GB_BYTES,
  localparam int unsigned ROWS   = P_BYTES / (P_ROW_W / 8),
  localparam int unsigned A_W    = $clog2(ROWS),
  localparam int unsigned OFF_W  = $clog2(P_ROW_W / 8),
  localparam int unsigned M_W    = 1 + MSG_ADDR_W + P_ROW_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  axil_req_t        axi_req,
  output axil_resp_t       axi_resp,
  // from the crossbar
  input  logic             rx_valid,
  output logic             rx_ready,
  input  logic [M_W-1:0]   rx_data,
  // to the broadcast bus
  output logic             bc_valid,
  input  logic             bc_ready,
  output logic [M_W-1:0]   bc_data,
  output logic             irq
);
  typedef enum logic [1:0] {S_IDLE, S_BCAST, S_COLLECT} state_e;

  regbus_req_t bus;
  logic        wr_ready, rd_ready;
  logic [31:0] rd_data, rd_q;

  axil_slave u_axi (.clk, .rst_n, .axi_req, .axi_resp, .bus, .wr_ready, .rd_ready, .rd_data);

  state_e            state;
  logic [15:0]       r_bc_base, r_bc_len, r_bc_dst, r_expect, r_steps;
  logic              r_irq_en, done;
  logic [15:0]       step, issued, rx_step;
  logic [31:0]       rx_total;
  logic [MSG_ADDR_W:0] bc_tag;            // {last, dst row} of the beat on the bus

  // ---------------- memory ----------------
  logic [P_ROW_W-1:0]   mem [ROWS];
  logic                 we, re;
  logic [A_W-1:0]       waddr, raddr;
  logic [P_ROW_W-1:0]   wdata, rdata;
  logic [P_ROW_W/8-1:0] wmask;

  logic wr_is_mem, rd_is_mem, bc_issue, rx_take, axi_mem_wr, axi_mem_rd;

  always_comb begin
    wr_is_mem  = bus.wr_addr[21];
    rd_is_mem  = bus.rd_addr[21];
    rx_ready   = 1'b1;
    rx_take    = rx_valid;
    axi_mem_wr = bus.wr_valid && wr_is_mem && !rx_take;
    wr_ready   = !(bus.wr_valid && wr_is_mem && rx_take);
    bc_issue   = (state == S_BCAST) && (issued < r_bc_len) && (!bc_valid || bc_ready);
    axi_mem_rd = bus.rd_valid && rd_is_mem && (state != S_BCAST);
    rd_ready   = !(bus.rd_valid && rd_is_mem && state == S_BCAST);

    we    = rx_take || axi_mem_wr;
    if (rx_take) begin
      waddr = A_W'(rx_data[P_ROW_W +: MSG_ADDR_W]);
      wdata = rx_data[P_ROW_W-1:0];
      wmask = '1;
    end else begin
      waddr = bus.wr_addr[OFF_W +: A_W];
      wdata = {(P_ROW_W/32){bus.wr_data}};
      wmask = (P_ROW_W/8)'(bus.wr_strb) << (4 * bus.wr_addr[OFF_W-1:2]);
    end
    re    = bc_issue || axi_mem_rd;
    raddr = bc_issue ? A_W'(r_bc_base + issued) : bus.rd_addr[OFF_W +: A_W];

    bc_data = {bc_tag, rdata};
    irq     = done && r_irq_en;
  end

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < P_ROW_W / 8; b++)
        if (wmask[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
    if (re) rdata <= mem[raddr];
  end

  // ---------------- registers and sequencer ----------------
  logic             axi_rd_mem_q;
  logic [OFF_W-3:0] axi_rd_word_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r_bc_base <= '0; r_bc_len <= '0; r_bc_dst <= '0; r_expect <= '0; r_steps <= 16'd1;
      r_irq_en <= 1'b0; done <= 1'b0;
      step <= '0; issued <= '0; rx_step <= '0; rx_total <= '0;
      bc_valid <= 1'b0; bc_tag <= '0;
      rd_q <= '0; axi_rd_mem_q <= 1'b0; axi_rd_word_q <= '0;
    end else begin
      // register writes
      if (bus.wr_valid && !wr_is_mem) begin
        unique case (bus.wr_addr[7:2])
          6'd0: if (bus.wr_data[0] && state == S_IDLE) begin
                  state <= S_BCAST; step <= '0; issued <= '0; rx_step <= '0; done <= 1'b0;
                end
          6'd1: if (bus.wr_data[1]) done <= 1'b0;
          6'd2: r_bc_base <= bus.wr_data[15:0];
          6'd3: r_bc_len  <= bus.wr_data[15:0];
          6'd4: r_bc_dst  <= bus.wr_data[15:0];
          6'd5: r_expect  <= bus.wr_data[15:0];
          6'd6: r_steps   <= bus.wr_data[15:0];
          6'd7: r_irq_en  <= bus.wr_data[0];
          default: ;
        endcase
      end
      // register reads; memory reads are selected one cycle later
      axi_rd_mem_q <= 1'b0;
      if (bus.rd_valid && rd_ready) begin
        axi_rd_mem_q  <= rd_is_mem;
        axi_rd_word_q <= bus.rd_addr[OFF_W-1:2];
        unique case (bus.rd_addr[7:2])
          6'd1: rd_q <= {30'd0, done, state != S_IDLE};
          6'd2: rd_q <= 32'(r_bc_base);
          6'd3: rd_q <= 32'(r_bc_len);
          6'd4: rd_q <= 32'(r_bc_dst);
          6'd5: rd_q <= 32'(r_expect);
          6'd6: rd_q <= 32'(r_steps);
          6'd7: rd_q <= 32'(r_irq_en);
          6'd8: rd_q <= 32'(step);
          6'd9: rd_q <= rx_total;
          default: rd_q <= '0;
        endcase
      end

      // received rows
      if (rx_take) begin
        rx_total <= rx_total + 1;
        rx_step  <= rx_step + 16'd1;
      end

      // broadcast stream: data comes from the memory read port one cycle
      // after issue and is held there (no other read) until taken
      if (bc_issue) begin
        bc_valid <= 1'b1;
        bc_tag   <= {(issued == r_bc_len - 16'd1), MSG_ADDR_W'(r_bc_dst + issued)};
        issued   <= issued + 16'd1;
      end else if (bc_ready) begin
        bc_valid <= 1'b0;
      end

      unique case (state)
        S_IDLE: ;
        S_BCAST:
          if (issued == r_bc_len && (!bc_valid || bc_ready) && !bc_issue) state <= S_COLLECT;
        S_COLLECT:
          if (rx_step >= r_expect) begin
            if (step + 16'd1 >= r_steps) begin
              state <= S_IDLE;
              done  <= 1'b1;
              step  <= step + 16'd1;
            end else begin
              state   <= S_BCAST;
              step    <= step + 16'd1;
              issued  <= '0;
              rx_step <= rx_take ? 16'd1 : 16'd0;
            end
          end
        default: state <= S_IDLE;
      endcase
    end
  end

  // one-cycle-late mux: a memory read returns the addressed 32-bit word
  always_comb rd_data = axi_rd_mem_q ? rdata[32*axi_rd_word_q +: 32] : rd_q;

  a_bc_hold: assert property (@(posedge clk) disable iff (!rst_n)
    bc_valid && !bc_ready |=> bc_valid && $stable(bc_data));
endmodule
