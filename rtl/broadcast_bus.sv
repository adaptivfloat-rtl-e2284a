// broadcast_bus: the broadcasting streaming bus that carries activation rows
// from the global buffer to every PE.  The paper names the bus and shows the
// GB driving it and each PE receiving from it; the handshake is this
// design's choice.
//
// One beat (PAYLOAD_W bits) is accepted from the source into a register and
// is then offered to all NUM_DST destinations at once.  Each destination
// takes it with its own ready, in the same or a later cycle; a pending mask
// remembers who still has to take it.  The next beat is accepted in the
// cycle the last pending destination takes the current one, so a bus whose
// destinations are all ready moves one beat per cycle, and a destination
// that is busy stalls the source (back-pressure) without holding up the
// others' copy of the current beat.
module broadcast_bus #(
  parameter int unsigned NUM_DST   = adaptivfloat_pkg::NUM_PE,
  parameter int unsigned PAYLOAD_W = adaptivfloat_pkg::MSG_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [PAYLOAD_W-1:0] in_data,
  output logic [NUM_DST-1:0]   out_valid,
  input  logic [NUM_DST-1:0]   out_ready,
  output logic [PAYLOAD_W-1:0] out_data
);
  logic [NUM_DST-1:0] pend, pend_nxt;

  always_comb begin
    out_valid = pend;
    pend_nxt  = pend & ~out_ready;
    in_ready  = (pend_nxt == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= '0;
      out_data <= '0;
    end else begin
      if (in_valid && in_ready) begin
        pend     <= '1;
        out_data <= in_data;
      end else begin
        pend <= pend_nxt;
      end
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (pend_nxt != '0) |=> $stable(out_data));
endmodule
