// gsn: Gather Shift Network.
//
// Moves every valid element from its input column i to column i - shiftCnt
// (toward column 0), squeezing stride-separated bytes together. The network
// has log2(N)+1 node layers of N nodes: a layer of input nodes, log2(N)-1
// layers of switch nodes and a layer of output nodes. Link layer l joins node
// layer l to l+1 with straight links (same column) and diagonal links that
// move an element 2^l columns toward column 0; diagonal links do not wrap.
// Node layer l routes by bit l of the element's own count, so the smallest
// shift comes first. As long as the requested move keeps the order of the
// elements and does not widen any gap between them (a gather), no two
// elements ever meet at a node.
//
// Interface: in_elem[i] = {valid, count[CW-1:0], payload[PW-1:0]}; out_valid
// and out_pay per output column (payload 0 where nothing arrives).
// Combinational. Structure and node types follow the paper; the packing of
// an element is this design's choice.
module gsn #(
  parameter int unsigned N  = 64,
  parameter int unsigned CW = 6,
  parameter int unsigned PW = 8,
  localparam int unsigned EW = 1 + CW + PW
) (
  input  logic [N-1:0][EW-1:0] in_elem,
  output logic [N-1:0]         out_valid,
  output logic [N-1:0][PW-1:0] out_pay
);
  localparam int unsigned L = $clog2(N);

  // nx0/nx1: the two inputs of node layer l (straight and diagonal links).
  logic [N-1:0][EW-1:0] o0 [L];   // straight outputs of node layer l
  logic [N-1:0][EW-1:0] o1 [L];   // diagonal outputs of node layer l
  logic [N-1:0][EW-1:0] i0 [L+1]; // straight inputs of node layer l (l >= 1)
  logic [N-1:0][EW-1:0] i1 [L+1]; // diagonal inputs of node layer l (l >= 1)

  for (genvar k = 0; k < N; k++) begin : g_in
    sn_input_node #(.CW(CW), .PW(PW), .CB(0)) u_in (
      .in0(in_elem[k]), .out0(o0[0][k]), .out1(o1[0][k]));
  end

  // Link layers: l = 0 .. L-1, shift of 2^l toward column 0.
  for (genvar l = 0; l < L; l++) begin : g_link
    for (genvar k = 0; k < N; k++) begin : g_col
      assign i0[l+1][k] = o0[l][k];
      if (k + (1 << l) < N) begin : g_diag
        assign i1[l+1][k] = o1[l][k + (1 << l)];
      end else begin : g_edge
        assign i1[l+1][k] = '0;
      end
    end
  end

  for (genvar l = 1; l < L; l++) begin : g_sw
    for (genvar k = 0; k < N; k++) begin : g_col
      sn_switch_node #(.CW(CW), .PW(PW), .CB(l)) u_sw (
        .in0(i0[l][k]), .in1(i1[l][k]), .out0(o0[l][k]), .out1(o1[l][k]));
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_out
    logic [EW-1:0] e;
    sn_output_node #(.CW(CW), .PW(PW)) u_out (.in0(i0[L][k]), .in1(i1[L][k]), .out0(e));
    assign out_valid[k] = e[EW-1];
    assign out_pay[k]   = e[EW-1] ? e[PW-1:0] : '0;
  end

  // Unused layer-0 inputs of the arrays.
  assign i0[0] = '0;
  assign i1[0] = '0;
endmodule
