// adaptivfloat_pkg: constants and types shared by the HFINT accelerator.
//
// AdaptivFloat<n,e> is a sign bit, e exponent bits and m = n-e-1 mantissa
// bits.  A word whose exponent and mantissa fields are all zero encodes 0
// (the +/-minimum of a denormal-free float is given up for it); any other
// word is (-1)^s * 2^(E + exp_bias) * (1 + M/2^m).  exp_bias is one small
// integer per tensor (layer), held on chip in a 4-bit register.
//
// Sizes that follow the paper: 8-bit operands with 3 exponent bits
// (HFINT8/30), vector size = lane count = 16, 4 PEs, 30-bit accumulation
// (2*(2^e-1) + 2*m + log2(H) with H = 256), 4-bit exp_bias registers,
// 1 MB weight buffer, 4 KB input/bias buffer and 1 MB global buffer.
// Own choices: the 4-bit register holds the magnitude of a non-positive
// exp_bias (exp_bias = -reg), the PE-internal integer has INT_FRAC = 4
// fractional bits, and the AXI side is AXI4-Lite with 32-bit data.
package adaptivfloat_pkg;

  // ---- number format -------------------------------------------------------
  parameter int unsigned N_BITS   = 8;                    // n
  parameter int unsigned N_EXP    = 3;                    // e
  parameter int unsigned N_MANT   = N_BITS - N_EXP - 1;   // m
  parameter int unsigned BIAS_W   = 4;                    // exp_bias register width

  // ---- PE datapath -----------------------------------------------------------
  parameter int unsigned VEC      = 16;                   // vector size = lanes
  parameter int unsigned H_ACC    = 256;                  // values accumulated
  parameter int unsigned ACC_W    = 2 * ((1 << N_EXP) - 1) + 2 * N_MANT + $clog2(H_ACC);
  parameter int unsigned INT_FRAC = 4;                    // fraction bits of the n-bit integer

  // Messages on the crossbar (PE -> GB) and the broadcast bus (GB -> PE):
  // {last, row address, one row of VEC AdaptivFloat words}.
  parameter int unsigned ROW_W      = VEC * N_BITS;
  parameter int unsigned MSG_ADDR_W = 16;
  parameter int unsigned MSG_W      = 1 + MSG_ADDR_W + ROW_W;

  // ---- system ----------------------------------------------------------------
  parameter int unsigned NUM_PE     = 4;
  parameter int unsigned WBUF_BYTES = 1 << 20;            // 1 MB per PE
  parameter int unsigned IBUF_BYTES = 1 << 12;            // 4 KB per PE
  parameter int unsigned GB_BYTES   = 1 << 20;            // 1 MB

  // ---- AXI4-Lite ---------------------------------------------------------------
  parameter int unsigned AXI_AW = 32;
  parameter int unsigned AXI_DW = 32;

  typedef struct packed {
    logic                awvalid;
    logic [AXI_AW-1:0]   awaddr;
    logic                wvalid;
    logic [AXI_DW-1:0]   wdata;
    logic [AXI_DW/8-1:0] wstrb;
    logic                bready;
    logic                arvalid;
    logic [AXI_AW-1:0]   araddr;
    logic                rready;
  } axil_req_t;

  typedef struct packed {
    logic                awready;
    logic                wready;
    logic                bvalid;
    logic [1:0]          bresp;
    logic                arready;
    logic                rvalid;
    logic [AXI_DW-1:0]   rdata;
    logic [1:0]          rresp;
  } axil_resp_t;

  // Simple register bus between an AXI4-Lite slave and the block behind it.
  // A write or read is offered until the block raises the matching ready;
  // read data is returned exactly one cycle after the read was accepted.
  typedef struct packed {
    logic                wr_valid;
    logic [AXI_AW-1:0]   wr_addr;
    logic [AXI_DW-1:0]   wr_data;
    logic [AXI_DW/8-1:0] wr_strb;
    logic                rd_valid;
    logic [AXI_AW-1:0]   rd_addr;
  } regbus_req_t;

  // AXI address map: bits [24:22] pick the slave (0..3 = PE0..PE3, 4 = GB).
  parameter int unsigned SLV_SEL_LSB = 22;
  parameter int unsigned SLV_SEL_W   = 3;

  // Activation function codes.
  typedef enum logic [1:0] {
    ACT_NONE     = 2'd0,
    ACT_RELU     = 2'd1,
    ACT_HARDTANH = 2'd2,
    ACT_HARDSIG  = 2'd3
  } act_mode_e;

endpackage
