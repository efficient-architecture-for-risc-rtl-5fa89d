// sn_output_node: last-layer node of a shift network.
//
// It receives the straight (in0) and diagonal (in1) links of the final link
// layer, of which at most one is valid, and forwards the valid one (the
// constant-0 element when neither is). Combinational.
//
// The node's function follows the paper's node drawing; the choice of
// forwarding the valid input is what that drawing implies.
module sn_output_node #(
  parameter int unsigned CW = 6,
  parameter int unsigned PW = 8,
  localparam int unsigned EW = 1 + CW + PW
) (
  input  logic [EW-1:0] in0,
  input  logic [EW-1:0] in1,
  output logic [EW-1:0] out0
);
  logic sel;
  assign sel  = ~in0[EW-1] & in1[EW-1];     // Get Sel
  assign out0 = sel ? in1 : in0;
endmodule
