// lifq: load in-flight queue.
//
// Every load mop that goes to memory gets an entry at the tail; the entry's
// index is the tag of the memory request, so the response can find its
// slot in the reorder buffer. The entry keeps the mop's control information
// (where the coalesced elements are in the line and where they go in the
// register file) until the in-order drain pops it at the head.
//
// Handshake: alloc when alloc_valid and alloc_ready (not full); alloc_tag is
// the index given to the new entry. head_valid/head_mop/head_tag show the
// oldest entry; pop removes it. Depth is this design's choice.
module lifq
  import earth_pkg::*;
#(
  parameter int unsigned DEPTH = QDEPTH,
  localparam int unsigned TW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          alloc_valid,
  output logic          alloc_ready,
  input  mop_t          alloc_mop,
  output logic [TW-1:0] alloc_tag,
  output logic          head_valid,
  output mop_t          head_mop,
  output logic [TW-1:0] head_tag,
  input  logic          pop
);
  mop_t          ent [DEPTH];
  logic [TW:0]   hp, tp;     // extra bit tells full from empty

  assign alloc_ready = !(hp[TW] != tp[TW] && hp[TW-1:0] == tp[TW-1:0]);
  assign head_valid  = hp != tp;
  assign alloc_tag   = tp[TW-1:0];
  assign head_tag    = hp[TW-1:0];
  assign head_mop    = ent[hp[TW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hp <= '0;
      tp <= '0;
    end else begin
      if (alloc_valid && alloc_ready) tp <= tp + 1'b1;
      if (pop && head_valid)          hp <= hp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_valid && alloc_ready) ent[tp[TW-1:0]] <= alloc_mop;
  end

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);
endmodule
