// input_buffer: the input/bias buffer of one HFINT PE. The paper gives 1 KB
// to 4 KB per PE; the default is the 4 KB of the main configuration. One row
// holds the VEC activations that are broadcast to all lanes in one cycle, so
// the default is 256 rows of 128 bits. Bias terms are held here as ordinary
// input elements (a constant 1.0 input paired with a bias column of the
// weight matrix), which is this design's reading of 'input/bias buffer'.
//
// Behaviour: a simple-dual-port memory written as an array (one write port,
// one read port).  Writes are byte-masked so the host can fill a wide row
// 32 bits at a time.  A read issued with rd_en returns its row on rdata one
// cycle later; while rd_en is low rdata keeps its last value, which lets the
// PE pipeline stall without re-reading.  A read and a write of the same row
// in one cycle returns the old contents.  The memory has no reset.
module input_buffer #(
  parameter int unsigned BYTES  = adaptivfloat_pkg::IBUF_BYTES,
  parameter int unsigned ROW_W  = adaptivfloat_pkg::VEC * adaptivfloat_pkg::N_BITS,
  localparam int unsigned ROWS  = BYTES / (ROW_W / 8),
  localparam int unsigned ADDR_W = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [ADDR_W-1:0]   waddr,
  input  logic [ROW_W-1:0]    wdata,
  input  logic [ROW_W/8-1:0]  wmask,
  input  logic                rd_en,
  input  logic [ADDR_W-1:0]   raddr,
  output logic [ROW_W-1:0]    rdata
);
  logic [ROW_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < ROW_W / 8; b++)
        if (wmask[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
    end
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
