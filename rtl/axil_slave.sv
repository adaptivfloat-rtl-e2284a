// axil_slave: an AXI4-Lite slave port, the "S" box that each PE and the
// global buffer carry onto the AXI bus.  The paper only names these ports;
// AXI4-Lite, 32-bit data and the register-bus behind it are this design's
// choices.
//
// It accepts one write and one read at a time (they may overlap each other)
// and hands them to the block as a register-bus request:
//   * write: AW and W are taken in any order (awready/wready are high while
//     the respective half is empty); once both are held, wr_valid is raised
//     until the block answers wr_ready; then B (OKAY) is returned.
//   * read: AR is taken while no read is pending; rd_valid is raised until
//     rd_ready; the block returns rd_data exactly one cycle after rd_ready,
//     which is captured into R (OKAY) and held until rready.
// All outputs are registered or depend only on registered state.
module axil_slave
  import adaptivfloat_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         axi_req,
  output axil_resp_t        axi_resp,
  output regbus_req_t       bus,
  input  logic              wr_ready,
  input  logic              rd_ready,
  input  logic [AXI_DW-1:0] rd_data
);
  logic                aw_full, w_full, b_pend;
  logic [AXI_AW-1:0]   aw_addr;
  logic [AXI_DW-1:0]   w_data;
  logic [AXI_DW/8-1:0] w_strb;
  logic                ar_full, r_wait, r_pend;
  logic [AXI_AW-1:0]   ar_addr;
  logic [AXI_DW-1:0]   r_data;

  always_comb begin
    axi_resp         = '0;
    axi_resp.awready = !aw_full && !b_pend;
    axi_resp.wready  = !w_full && !b_pend;
    axi_resp.bvalid  = b_pend;
    axi_resp.bresp   = 2'b00;
    axi_resp.arready = !ar_full && !r_wait && !r_pend;
    axi_resp.rvalid  = r_pend;
    axi_resp.rdata   = r_data;
    axi_resp.rresp   = 2'b00;

    bus          = '0;
    bus.wr_valid = aw_full && w_full;
    bus.wr_addr  = aw_addr;
    bus.wr_data  = w_data;
    bus.wr_strb  = w_strb;
    bus.rd_valid = ar_full;
    bus.rd_addr  = ar_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_full <= 1'b0; w_full <= 1'b0; b_pend <= 1'b0;
      aw_addr <= '0;   w_data <= '0;   w_strb <= '0;
      ar_full <= 1'b0; r_wait <= 1'b0; r_pend <= 1'b0;
      ar_addr <= '0;   r_data <= '0;
    end else begin
      // write channel
      if (axi_req.awvalid && axi_resp.awready) begin
        aw_full <= 1'b1; aw_addr <= axi_req.awaddr;
      end
      if (axi_req.wvalid && axi_resp.wready) begin
        w_full <= 1'b1; w_data <= axi_req.wdata; w_strb <= axi_req.wstrb;
      end
      if (bus.wr_valid && wr_ready) begin
        aw_full <= 1'b0; w_full <= 1'b0; b_pend <= 1'b1;
      end
      if (b_pend && axi_req.bready) b_pend <= 1'b0;
      // read channel
      if (axi_req.arvalid && axi_resp.arready) begin
        ar_full <= 1'b1; ar_addr <= axi_req.araddr;
      end
      if (bus.rd_valid && rd_ready) begin
        ar_full <= 1'b0; r_wait <= 1'b1;
      end
      if (r_wait) begin
        r_wait <= 1'b0; r_pend <= 1'b1; r_data <= rd_data;
      end
      if (r_pend && axi_req.rready) r_pend <= 1'b0;
    end
  end

  // AXI rule: a response, once valid, stays valid and unchanged until taken.
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n)
    axi_resp.bvalid && !axi_req.bready |=> axi_resp.bvalid);
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
    axi_resp.rvalid && !axi_req.rready |=> axi_resp.rvalid && $stable(axi_resp.rdata));
endmodule
