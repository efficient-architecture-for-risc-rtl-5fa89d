// sn_switch_node: middle-layer node of a shift network.
//
// Two inputs arrive, in0 on the straight link and in1 on the diagonal link of
// the layer before; the network guarantees that at most one is valid. The
// select comes from bit CB of the valid input's shift count: the node either
// keeps the order (out0 = in0, out1 = in1) or exchanges it, so that the valid
// element leaves on out1 (diagonal) exactly when its bit CB is 1.
// Combinational.
module sn_switch_node #(
  parameter int unsigned CW = 6,
  parameter int unsigned PW = 8,
  parameter int unsigned CB = 1,
  localparam int unsigned EW = 1 + CW + PW
) (
  input  logic [EW-1:0] in0,
  input  logic [EW-1:0] in1,
  output logic [EW-1:0] out0,
  output logic [EW-1:0] out1
);
  logic v0, v1, sel;
  assign v0 = in0[EW-1];
  assign v1 = in1[EW-1];
  // Get Sel: exchange when in0 must go diagonal or in1 must go straight.
  assign sel  = v0 ? in0[PW+CB] : (v1 & ~in1[PW+CB]);
  assign out0 = sel ? in1 : in0;
  assign out1 = sel ? in0 : in1;
endmodule
