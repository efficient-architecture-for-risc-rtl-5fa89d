// lrob: load reorder buffer.
//
// Memory responses may come back in any order. Each carries the tag of its
// load in-flight queue entry and is parked in the slot of that tag. The
// slot of the queue head is offered to the data organizer as soon as it is
// filled (head_ready), so data leaves strictly in request order; release
// empties the slot. A response for the head that arrives in the same cycle
// is visible the cycle after. resp_ready is always 1: every in-flight tag
// owns a slot.
//
// The paper names the buffer and its job (restoring request order); one slot
// per in-flight tag is this design's choice.
module lrob
  import earth_pkg::*;
#(
  parameter int unsigned DEPTH = QDEPTH,
  localparam int unsigned TW = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            resp_valid,
  input  logic [TW-1:0]   resp_tag,
  input  logic [MLEN-1:0] resp_data,
  input  logic [TW-1:0]   head_tag,
  output logic            head_ready,
  output logic [MLEN-1:0] head_data,
  input  logic            release_head
);
  logic [MLEN-1:0]  data [DEPTH];
  logic [DEPTH-1:0] full;

  assign head_ready = full[head_tag];
  assign head_data  = data[head_tag];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
    end else begin
      if (release_head)  full[head_tag] <= 1'b0;
      if (resp_valid)    full[resp_tag] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (resp_valid) data[resp_tag] <= resp_data;
  end

  a_no_double: assert property (@(posedge clk) disable iff (!rst_n)
                                resp_valid |-> !full[resp_tag] || (release_head && resp_tag == head_tag));
  a_release_ready: assert property (@(posedge clk) disable iff (!rst_n) release_head |-> head_ready);
endmodule
