// tb_global_buffer: the host fills GB rows over AXI, then starts a run of 3
// time steps.  In every step the testbench checks the broadcast beats (row
// data, destination row, last flag, order) under random back-pressure, then
// plays the PEs and sends EXPECT result rows into the crossbar port, some
// of them into the broadcast region so that the next step must broadcast the
// new values (the recurrent loop).  After the run it checks IRQ, DONE and the
// step counter, reads rows back over AXI and clears the interrupt.
module tb_global_buffer;
  import adaptivfloat_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t  m_req;
  axil_resp_t m_resp;
  logic rx_valid, rx_ready, bc_valid, bc_ready, irq;
  logic [MSG_W-1:0] rx_data, bc_data;
  int checks = 0, failures = 0, bp = 0;

  global_buffer dut (.clk, .rst_n, .axi_req(m_req), .axi_resp(m_resp), .rx_valid, .rx_ready,
                     .rx_data, .bc_valid, .bc_ready, .bc_data, .irq);

  `include "axil_master_tasks.svh"

  localparam int BASE = 300, LEN = 6, DST = 17, EXPECT = 5, STEPS = 3;
  logic [ROW_W-1:0] model [int];
  int beats;

  function automatic logic [ROW_W-1:0] rnd_row();
    logic [ROW_W-1:0] r;
    for (int i = 0; i < ROW_W / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  always @(negedge clk) bc_ready = ($urandom % 3) != 0;

  // broadcast monitor
  always @(posedge clk) if (rst_n) begin
    if (bc_valid && !bc_ready) bp++;
    if (bc_valid && bc_ready) begin
      automatic int i = beats % LEN;
      checks++;
      if (bc_data[ROW_W-1:0] !== model[BASE + i] ||
          int'(bc_data[ROW_W +: MSG_ADDR_W]) != DST + i ||
          bc_data[MSG_W-1] != (i == LEN - 1)) begin
        failures++; $display("FAIL beat %0d", beats);
      end
      beats++;
    end
  end

  task automatic send_rx(int row, logic [ROW_W-1:0] d);
    @(negedge clk);
    rx_valid = 1; rx_data = {1'b0, MSG_ADDR_W'(row), d};
    do @(posedge clk); while (!rx_ready);
    @(negedge clk); rx_valid = 0;
    model[row] = d;
  endtask

  initial begin
    #2000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] r;
    logic [31:0] d;
    m_req = '0; rx_valid = 0; rx_data = '0; beats = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int row = BASE; row < BASE + LEN; row++) begin
      model[row] = rnd_row();
      for (int w = 0; w < ROW_W / 32; w++)
        axil_write(32'h0020_0000 | 32'(row * (ROW_W / 8) + w * 4), model[row][w*32 +: 32], r);
    end
    axil_write(2 * 4, BASE, r); axil_write(3 * 4, LEN, r); axil_write(4 * 4, DST, r);
    axil_write(5 * 4, EXPECT, r); axil_write(6 * 4, STEPS, r); axil_write(7 * 4, 1, r);
    axil_write(0, 1, r);
    for (int s = 0; s < STEPS; s++) begin
      wait (beats == (s + 1) * LEN);
      checks++; if (irq) begin failures++; $display("FAIL early irq"); end
      for (int k = 0; k < EXPECT; k++)
        send_rx((k % 2) ? BASE + ($urandom % LEN) : 5000 + s * 8 + k, rnd_row());
    end
    repeat (5) @(posedge clk);
    checks++; if (!irq) begin failures++; $display("FAIL no irq"); end
    checks++; if (beats != STEPS * LEN) begin failures++; $display("FAIL beats %0d", beats); end
    axil_read(8 * 4, d, r);
    checks++; if (d != STEPS) begin failures++; $display("FAIL step count %0d", d); end
    axil_read(9 * 4, d, r);
    checks++; if (d != STEPS * EXPECT) begin failures++; $display("FAIL rx count %0d", d); end
    foreach (model[row]) for (int w = 0; w < ROW_W / 32; w++) begin
      axil_read(32'h0020_0000 | 32'(row * (ROW_W / 8) + w * 4), d, r);
      checks++;
      if (d !== model[row][w*32 +: 32]) begin failures++; $display("FAIL readback row %0d", row); end
    end
    axil_write(1 * 4, 2, r);
    repeat (2) @(posedge clk);
    checks++; if (irq) begin failures++; $display("FAIL irq not cleared"); end
    checks++; if (bp == 0) begin failures++; $display("FAIL no back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
