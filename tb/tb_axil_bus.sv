// tb_axil_bus: one AXI4-Lite master, the bus, and NUM_PE+1 slave ports
// (axil_slave) each backed by its own 64-word register file.  Random writes
// and reads over the whole address map check that each window reaches only
// its own slave, that read data come back from the right one, and that an
// address outside every window is answered with DECERR.
module tb_axil_bus;
  import adaptivfloat_pkg::*;
  localparam int NS = NUM_PE + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t   m_req;
  axil_resp_t  m_resp;
  axil_req_t   s_req  [NS];
  axil_resp_t  s_resp [NS];
  regbus_req_t bus [NS];
  logic [31:0] rd_data [NS];
  logic [31:0] regs  [NS][64];
  logic [31:0] model [NS][64];
  int checks = 0, failures = 0;

  axil_bus dut (.clk, .rst_n, .m_req, .m_resp, .s_req, .s_resp);

  for (genvar s = 0; s < NS; s++) begin : g_s
    axil_slave u_s (.clk, .rst_n, .axi_req(s_req[s]), .axi_resp(s_resp[s]), .bus(bus[s]),
                    .wr_ready(1'b1), .rd_ready(1'b1), .rd_data(rd_data[s]));
    always_ff @(posedge clk) begin
      if (rst_n && bus[s].wr_valid) regs[s][bus[s].wr_addr[7:2]] <= bus[s].wr_data;
      rd_data[s] <= regs[s][bus[s].rd_addr[7:2]];
    end
  end

  `include "axil_master_tasks.svh"

  initial begin
    #400000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] resp;
    logic [31:0] d;
    m_req = '0;
    for (int s = 0; s < NS; s++) for (int i = 0; i < 64; i++) begin regs[s][i] = 0; model[s][i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      automatic int s = $urandom % (NS + 1);        // NS = an unmapped window
      automatic int a = $urandom % 64;
      automatic logic [31:0] addr = (32'(s) << SLV_SEL_LSB) | 32'(a * 4);
      if ($urandom % 2) begin
        d = $urandom;
        axil_write(addr, d, resp);
        if (s < NS) model[s][a] = d;
        checks++;
        if (resp != (s < NS ? 2'b00 : 2'b11)) begin failures++; $display("FAIL bresp s=%0d", s); end
      end else begin
        axil_read(addr, d, resp);
        checks++;
        if (s < NS ? (d !== model[s][a] || resp != 2'b00) : (resp != 2'b11)) begin
          failures++; $display("FAIL read s=%0d a=%0d got %h", s, a, d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
