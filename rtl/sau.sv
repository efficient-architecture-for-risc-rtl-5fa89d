// sau: store acknowledgement unit.
//
// Store acknowledgements return from memory in any order, each with the tag
// (store in-flight queue index) of its request. The unit keeps one
// "acknowledged" bit per entry and retires the queue head as soon as its bit
// is set, so entries leave the store queue strictly in order, one per cycle.
//
// The paper names the unit and its job (in-order retirement of stores whose
// acknowledgements arrive out of order); the bit-per-entry form is this
// design's choice. Interface: ack_valid/ack_tag in, head_valid/head_tag of the
// store queue in, retire out (combinational from the registered bits).
module sau
  import earth_pkg::*;
#(
  parameter int unsigned DEPTH = QDEPTH,
  localparam int unsigned TW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ack_valid,
  input  logic [TW-1:0] ack_tag,
  input  logic          head_valid,
  input  logic [TW-1:0] head_tag,
  output logic          retire
);
  logic [DEPTH-1:0] acked;

  assign retire = head_valid && acked[head_tag];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acked <= '0;
    end else begin
      if (retire)    acked[head_tag] <= 1'b0;
      if (ack_valid) acked[ack_tag]  <= 1'b1;
    end
  end

  a_no_double_ack: assert property (@(posedge clk) disable iff (!rst_n)
                                    ack_valid |-> !acked[ack_tag] || (retire && ack_tag == head_tag));
endmodule
