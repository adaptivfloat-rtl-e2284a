// AXI4-Lite master tasks shared by the testbenches.  The including module
// must declare: clk, axil_req_t m_req, axil_resp_t m_resp.
// AW and W are offered together; each task waits for its response.
task automatic axil_write(input logic [31:0] addr, input logic [31:0] data,
                          output logic [1:0] resp);
  bit aw_ok = 0, w_ok = 0;
  @(negedge clk);
  m_req.awvalid = 1; m_req.awaddr = addr;
  m_req.wvalid  = 1; m_req.wdata  = data; m_req.wstrb = 4'hF;
  m_req.bready  = 1;
  while (!(aw_ok && w_ok)) begin
    @(posedge clk);
    if (m_resp.awready && m_req.awvalid) aw_ok = 1;
    if (m_resp.wready && m_req.wvalid)   w_ok  = 1;
    @(negedge clk);
    if (aw_ok) m_req.awvalid = 0;
    if (w_ok)  m_req.wvalid  = 0;
  end
  while (!m_resp.bvalid) @(negedge clk);
  resp = m_resp.bresp;
  @(posedge clk); @(negedge clk);
  m_req.bready = 0;
endtask

task automatic axil_read(input logic [31:0] addr, output logic [31:0] data,
                         output logic [1:0] resp);
  @(negedge clk);
  m_req.arvalid = 1; m_req.araddr = addr; m_req.rready = 1;
  do @(posedge clk); while (!m_resp.arready);
  @(negedge clk); m_req.arvalid = 0;
  while (!m_resp.rvalid) @(negedge clk);
  data = m_resp.rdata; resp = m_resp.rresp;
  @(posedge clk); @(negedge clk);
  m_req.rready = 0;
endtask
