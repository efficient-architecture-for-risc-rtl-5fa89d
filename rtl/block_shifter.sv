// block_shifter: circular rotation by whole ELEN blocks.
//
// Between the register file banks and the rest of the datapath, block q of a
// register (or register q of a column) lives in bank (q + amt) mod NB. With
// dir = 0 (write side) logical block q is sent to bank (q + amt) mod NB; with
// dir = 1 (read side) bank k is returned as logical block (k - amt) mod NB, so
// that block 0 of the register comes out at position 0. Combinational.
//
// The paper gives the job (circular shifts between bank order and register
// order) and the mapping it follows from; the rotation amounts are derived
// from that mapping.
module block_shifter #(
  parameter int unsigned NB = 8,
  parameter int unsigned BW = 64,
  localparam int unsigned AW = $clog2(NB)
) (
  input  logic [AW-1:0]        amt,
  input  logic                 dir,
  input  logic [NB-1:0][BW-1:0] din,
  output logic [NB-1:0][BW-1:0] dout
);
  always_comb begin
    for (int k = 0; k < NB; k++) begin
      logic [AW-1:0] src;
      src = dir ? AW'(k) + amt : AW'(k) - amt;
      dout[k] = din[src];
    end
  end
endmodule
