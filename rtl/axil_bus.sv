// axil_bus: the AXI bus of the accelerator, a 1-master to NUM_SLV-slave
// AXI4-Lite interconnect.  The paper shows one AXI bus joining the host to
// the slave port of every PE and of the global buffer; its internals are
// this design's own.
//
// Address decode: slave index = addr[SEL_LSB +: SEL_W] (4 MB windows:
// 0..3 = PE0..PE3, 4 = GB).  An address that decodes to no slave is answered
// by the bus itself with DECERR (2'b11) and read data 0.
// Writes and reads are routed independently.  Each direction carries one
// transaction at a time: the slave is chosen from awaddr (or araddr) when
// the transaction starts and kept until its B (or R) handshake.
module axil_bus
  import adaptivfloat_pkg::*;
#(
  parameter int unsigned NUM_SLV = NUM_PE + 1,
  parameter int unsigned SEL_LSB = SLV_SEL_LSB,
  parameter int unsigned SEL_W   = SLV_SEL_W
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  m_req,
  output axil_resp_t m_resp,
  output axil_req_t  s_req  [NUM_SLV],
  input  axil_resp_t s_resp [NUM_SLV]
);
  logic             w_busy, aw_done, w_done, r_busy, ar_done;
  logic [SEL_W-1:0] w_sel, r_sel, w_sel_q, r_sel_q;
  logic             w_err, r_err;    // transaction goes to no slave
  logic             err_b, err_r;    // DECERR response pending

  always_comb begin
    w_sel = w_busy ? w_sel_q : m_req.awaddr[SEL_LSB +: SEL_W];
    r_sel = r_busy ? r_sel_q : m_req.araddr[SEL_LSB +: SEL_W];
    w_err = (int'(w_sel) >= int'(NUM_SLV));
    r_err = (int'(r_sel) >= int'(NUM_SLV));

    m_resp = '0;
    for (int s = 0; s < NUM_SLV; s++) begin
      s_req[s] = '0;
      // write path
      if (!w_err && int'(w_sel) == s && (w_busy || m_req.awvalid)) begin
        s_req[s].awvalid = m_req.awvalid && !aw_done;
        s_req[s].awaddr  = m_req.awaddr;
        s_req[s].wvalid  = m_req.wvalid && !w_done;
        s_req[s].wdata   = m_req.wdata;
        s_req[s].wstrb   = m_req.wstrb;
        s_req[s].bready  = m_req.bready;
        m_resp.awready   = s_resp[s].awready && !aw_done;
        m_resp.wready    = s_resp[s].wready && !w_done;
        m_resp.bvalid    = s_resp[s].bvalid;
        m_resp.bresp     = s_resp[s].bresp;
      end
      // read path
      if (!r_err && int'(r_sel) == s && (r_busy || m_req.arvalid)) begin
        s_req[s].arvalid = m_req.arvalid && !ar_done;
        s_req[s].araddr  = m_req.araddr;
        s_req[s].rready  = m_req.rready;
        m_resp.arready   = s_resp[s].arready && !ar_done;
        m_resp.rvalid    = s_resp[s].rvalid;
        m_resp.rdata     = s_resp[s].rdata;
        m_resp.rresp     = s_resp[s].rresp;
      end
    end
    // decode errors: accept and answer locally
    if (w_err && (w_busy || m_req.awvalid)) begin
      m_resp.awready = !aw_done;
      m_resp.wready  = !w_done;
      m_resp.bvalid  = err_b;
      m_resp.bresp   = 2'b11;
    end
    if (r_err && (r_busy || m_req.arvalid)) begin
      m_resp.arready = !ar_done;
      m_resp.rvalid  = err_r;
      m_resp.rdata   = '0;
      m_resp.rresp   = 2'b11;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_busy <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0; w_sel_q <= '0; err_b <= 1'b0;
      r_busy <= 1'b0; ar_done <= 1'b0; r_sel_q <= '0; err_r <= 1'b0;
    end else begin
      if (!w_busy && m_req.awvalid) begin
        w_busy <= 1'b1; w_sel_q <= w_sel;
      end
      if (m_req.awvalid && m_resp.awready) aw_done <= 1'b1;
      if (m_req.wvalid && m_resp.wready)   w_done  <= 1'b1;
      if (w_err && w_busy && aw_done && w_done && !err_b) err_b <= 1'b1;
      if (m_resp.bvalid && m_req.bready) begin
        w_busy <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0; err_b <= 1'b0;
      end
      if (!r_busy && m_req.arvalid) begin
        r_busy <= 1'b1; r_sel_q <= r_sel;
      end
      if (m_req.arvalid && m_resp.arready) ar_done <= 1'b1;
      if (r_err && r_busy && ar_done && !err_r) err_r <= 1'b1;
      if (m_resp.rvalid && m_req.rready) begin
        r_busy <= 1'b0; ar_done <= 1'b0; err_r <= 1'b0;
      end
    end
  end
endmodule
