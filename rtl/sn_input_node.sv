// sn_input_node: first-layer node of a shift network.
//
// An element is a packed {valid, shift count[CW-1:0], payload[PW-1:0]}. The
// node reads bit CB of the count of its (single) input: when it is 0 the
// element leaves on out0, the straight link; when it is 1 it leaves on out1,
// the diagonal link. The unused output carries the constant 0 element, as the
// node drawing in the paper shows (a mux pair, an inverter on the select and a
// constant-zero input). Combinational.
module sn_input_node #(
  parameter int unsigned CW = 6,
  parameter int unsigned PW = 8,
  parameter int unsigned CB = 0,
  localparam int unsigned EW = 1 + CW + PW
) (
  input  logic [EW-1:0] in0,
  output logic [EW-1:0] out0,
  output logic [EW-1:0] out1
);
  logic sel;
  assign sel  = in0[EW-1] & in0[PW+CB];     // Get Sel
  assign out0 = (!sel) ? in0 : '0;
  assign out1 = sel    ? in0 : '0;
endmodule
