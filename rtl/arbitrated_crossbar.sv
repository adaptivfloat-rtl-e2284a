// arbitrated_crossbar: the arbitrated channel that carries computed
// activations from the NUM_SRC PEs to the global buffer.  The paper names an
// "arbitrated crossbar" and shows every PE sending into it and the GB
// receiving from it; the round-robin policy, the valid/ready handshake and
// the single output register are this design's choices.
//
// Each source offers a PAYLOAD_W-bit message with valid/ready.  When the
// output register is empty or being emptied, one requesting source is
// granted, round-robin starting after the last winner, and its message is
// registered together with its source index.  A source that requests while
// another is granted simply waits (its ready stays low): that is the
// crossbar's stall.  Throughput: one message per cycle; latency: one cycle.
module arbitrated_crossbar #(
  parameter int unsigned NUM_SRC   = adaptivfloat_pkg::NUM_PE,
  parameter int unsigned PAYLOAD_W = adaptivfloat_pkg::MSG_W,
  localparam int unsigned SRC_W    = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NUM_SRC-1:0]    in_valid,
  output logic [NUM_SRC-1:0]    in_ready,
  input  logic [PAYLOAD_W-1:0]  in_data [NUM_SRC],
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [PAYLOAD_W-1:0]  out_data,
  output logic [SRC_W-1:0]      out_src
);
  logic [SRC_W-1:0] last, pick;
  logic             any, load;

  always_comb begin
    any  = 1'b0;
    pick = last;
    // search NUM_SRC positions starting after the last winner
    for (int k = NUM_SRC; k >= 1; k--) begin
      logic [SRC_W-1:0] idx;
      idx = SRC_W'((int'(last) + k) % NUM_SRC);
      if (in_valid[idx]) begin
        any  = 1'b1;
        pick = SRC_W'(idx);
      end
    end
    load     = any && (!out_valid || out_ready);
    in_ready = '0;
    if (load) in_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_src   <= '0;
      last      <= SRC_W'(NUM_SRC - 1);
    end else begin
      if (load) begin
        out_valid <= 1'b1;
        out_data  <= in_data[pick];
        out_src   <= pick;
        last      <= pick;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready));
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
