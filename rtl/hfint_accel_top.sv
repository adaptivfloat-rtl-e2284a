// hfint_accel_top: the HFINT accelerator system for sequence-to-sequence
// networks - four HFINT PEs and a global buffer (GB).
//
// Dataflow (as in the paper's system figure): each PE keeps its share of the
// weight matrix in its own weight buffer (weight-stationary) and sends each
// group of VEC computed activations over the arbitrated crossbar to the GB;
// the GB collects them and broadcasts rows back to all four PEs over the
// streaming bus, which starts the next time step or the next layer.  Every
// PE and the GB has an AXI slave port on one AXI bus, through which a host
// loads weights, inputs and the per-layer exp_bias registers and reads
// results; the GB raises IRQ at the end of a run.
//
// A typical run: load weights into each PE, set each PE's registers
// (NUM_CHUNKS, NUM_GROUPS, W_BASE, OUT_BASE = where its rows go in the GB,
// biases, activation, AUTO_RUN = 1), put the input rows into the GB, set
// the GB's BC_BASE/BC_LEN/BC_DST, EXPECT = total rows the four PEs produce
// per step, and STEPS, then write GB CTRL.  Each step the GB broadcasts, all
// PEs compute in parallel, the GB collects EXPECT rows; IRQ after the last.
//
// Top-level ports are the AXI4-Lite slave signals of the host side (32-bit
// address and data) and the interrupt.  AXI address map: bits [24:22] select
// PE0..PE3 (0..3) or the GB (4); see hfint_pe and global_buffer for the
// offsets inside each 4 MB window.
module hfint_accel_top
  import adaptivfloat_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                s_axi_awvalid,
  output logic                s_axi_awready,
  input  logic [AXI_AW-1:0]   s_axi_awaddr,
  input  logic                s_axi_wvalid,
  output logic                s_axi_wready,
  input  logic [AXI_DW-1:0]   s_axi_wdata,
  input  logic [AXI_DW/8-1:0] s_axi_wstrb,
  output logic                s_axi_bvalid,
  input  logic                s_axi_bready,
  output logic [1:0]          s_axi_bresp,
  input  logic                s_axi_arvalid,
  output logic                s_axi_arready,
  input  logic [AXI_AW-1:0]   s_axi_araddr,
  output logic                s_axi_rvalid,
  input  logic                s_axi_rready,
  output logic [AXI_DW-1:0]   s_axi_rdata,
  output logic [1:0]          s_axi_rresp,
  output logic                irq,
  output logic [NUM_PE-1:0]   pe_busy
);
  localparam int unsigned NS = NUM_PE + 1;

  axil_req_t  m_req;
  axil_resp_t m_resp;
  axil_req_t  s_req  [NS];
  axil_resp_t s_resp [NS];

  always_comb begin
    m_req.awvalid = s_axi_awvalid;
    m_req.awaddr  = s_axi_awaddr;
    m_req.wvalid  = s_axi_wvalid;
    m_req.wdata   = s_axi_wdata;
    m_req.wstrb   = s_axi_wstrb;
    m_req.bready  = s_axi_bready;
    m_req.arvalid = s_axi_arvalid;
    m_req.araddr  = s_axi_araddr;
    m_req.rready  = s_axi_rready;
    s_axi_awready = m_resp.awready;
    s_axi_wready  = m_resp.wready;
    s_axi_bvalid  = m_resp.bvalid;
    s_axi_bresp   = m_resp.bresp;
    s_axi_arready = m_resp.arready;
    s_axi_rvalid  = m_resp.rvalid;
    s_axi_rdata   = m_resp.rdata;
    s_axi_rresp   = m_resp.rresp;
  end

  axil_bus u_axi_bus (.clk, .rst_n, .m_req, .m_resp, .s_req, .s_resp);

  // PE -> crossbar -> GB
  logic [NUM_PE-1:0] x_valid, x_ready;
  logic [MSG_W-1:0]  x_data [NUM_PE];
  logic              gb_rx_valid, gb_rx_ready;
  logic [MSG_W-1:0]  gb_rx_data;
  logic [$clog2(NUM_PE)-1:0] gb_rx_src;

  // GB -> broadcast bus -> PEs
  logic              gb_bc_valid, gb_bc_ready;
  logic [MSG_W-1:0]  gb_bc_data;
  logic [NUM_PE-1:0] pe_bc_valid, pe_bc_ready;
  logic [MSG_W-1:0]  pe_bc_data;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    hfint_pe u_pe (
      .clk, .rst_n,
      .axi_req(s_req[p]), .axi_resp(s_resp[p]),
      .bc_valid(pe_bc_valid[p]), .bc_ready(pe_bc_ready[p]), .bc_data(pe_bc_data),
      .out_valid(x_valid[p]), .out_ready(x_ready[p]), .out_data(x_data[p]),
      .busy(pe_busy[p]));
  end

  arbitrated_crossbar #(.NUM_SRC(NUM_PE), .PAYLOAD_W(MSG_W)) u_xbar (
    .clk, .rst_n,
    .in_valid(x_valid), .in_ready(x_ready), .in_data(x_data),
    .out_valid(gb_rx_valid), .out_ready(gb_rx_ready), .out_data(gb_rx_data),
    .out_src(gb_rx_src));

  global_buffer u_gb (
    .clk, .rst_n,
    .axi_req(s_req[NUM_PE]), .axi_resp(s_resp[NUM_PE]),
    .rx_valid(gb_rx_valid), .rx_ready(gb_rx_ready), .rx_data(gb_rx_data),
    .bc_valid(gb_bc_valid), .bc_ready(gb_bc_ready), .bc_data(gb_bc_data),
    .irq);

  broadcast_bus #(.NUM_DST(NUM_PE), .PAYLOAD_W(MSG_W)) u_bcast (
    .clk, .rst_n,
    .in_valid(gb_bc_valid), .in_ready(gb_bc_ready), .in_data(gb_bc_data),
    .out_valid(pe_bc_valid), .out_ready(pe_bc_ready), .out_data(pe_bc_data));

  // The source index is not needed by the GB: each message carries its row.
  logic unused_src;
  assign unused_src = ^gb_rx_src;
endmodule
