// tb_axil_slave: drives AXI4-Lite writes and reads into one slave port whose
// register-bus side is a 64-word register file with random wr_ready and
// rd_ready stalls.  Checks that every write reaches the register file with
// its address and data, that read data come back with OKAY, and that a
// stalled block delays but never loses a transaction.
module tb_axil_slave;
  import adaptivfloat_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t   m_req;
  axil_resp_t  m_resp;
  regbus_req_t bus;
  logic wr_ready, rd_ready;
  logic [31:0] rd_data;
  logic [31:0] regs [64];
  logic [31:0] model [64];
  int checks = 0, failures = 0, stalls = 0;

  axil_slave dut (.clk, .rst_n, .axi_req(m_req), .axi_resp(m_resp), .bus,
                  .wr_ready, .rd_ready, .rd_data);

  `include "axil_master_tasks.svh"

  always_ff @(posedge clk) begin
    wr_ready <= ($urandom % 3) != 0;
    rd_ready <= ($urandom % 3) != 0;
    if (bus.wr_valid && wr_ready) regs[bus.wr_addr[7:2]] <= bus.wr_data;
    if (bus.rd_valid && !rd_ready) stalls++;
    if (bus.rd_valid && rd_ready) rd_data <= regs[bus.rd_addr[7:2]];
    else rd_data <= $urandom;
  end

  initial begin
    #400000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] resp;
    logic [31:0] d;
    m_req = '0;
    for (int i = 0; i < 64; i++) begin regs[i] = 0; model[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      automatic int a = $urandom % 64;
      if ($urandom % 2) begin
        d = $urandom;
        axil_write(32'(a * 4), d, resp);
        model[a] = d;
        checks++; if (resp != 2'b00) begin failures++; $display("FAIL bresp"); end
      end else begin
        axil_read(32'(a * 4), d, resp);
        checks++;
        if (d !== model[a] || resp != 2'b00) begin
          failures++; $display("FAIL read %0d got %h exp %h", a, d, model[a]);
        end
      end
    end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
