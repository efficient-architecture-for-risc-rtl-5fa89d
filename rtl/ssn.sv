// ssn: Scatter Shift Network.
//
// Mirror of the gather network: every valid element moves from column i to
// column i + shiftCnt (away from column 0), spreading contiguous bytes out to
// stride-separated positions. The node layers are the same (input, switch,
// output nodes, log2(N)+1 layers of N nodes) but the largest shift comes
// first: node layer t routes by bit L-1-t of the element's count and its
// diagonal links move 2^(L-1-t) columns; they do not wrap. For a scatter
// (order kept, gaps never narrowed) this order makes the network
// conflict-free.
//
// Interface: in_elem[i] = {valid, count[CW-1:0], payload[PW-1:0]}; out_valid
// and out_pay per output column (payload 0 where nothing arrives).
// Combinational. The paper describes the SSN as the GSN "with reversed
// logic"; the largest-shift-first layer order is the reading taken here.
module ssn #(
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

  logic [N-1:0][EW-1:0] o0 [L];
  logic [N-1:0][EW-1:0] o1 [L];
  logic [N-1:0][EW-1:0] i0 [L+1];
  logic [N-1:0][EW-1:0] i1 [L+1];

  for (genvar k = 0; k < N; k++) begin : g_in
    sn_input_node #(.CW(CW), .PW(PW), .CB(L-1)) u_in (
      .in0(in_elem[k]), .out0(o0[0][k]), .out1(o1[0][k]));
  end

  // Link layer t moves 2^(L-1-t) columns away from column 0.
  for (genvar t = 0; t < L; t++) begin : g_link
    for (genvar k = 0; k < N; k++) begin : g_col
      assign i0[t+1][k] = o0[t][k];
      if (k >= (1 << (L-1-t))) begin : g_diag
        assign i1[t+1][k] = o1[t][k - (1 << (L-1-t))];
      end else begin : g_edge
        assign i1[t+1][k] = '0;
      end
    end
  end

  for (genvar t = 1; t < L; t++) begin : g_sw
    for (genvar k = 0; k < N; k++) begin : g_col
      sn_switch_node #(.CW(CW), .PW(PW), .CB(L-1-t)) u_sw (
        .in0(i0[t][k]), .in1(i1[t][k]), .out0(o0[t][k]), .out1(o1[t][k]));
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_out
    logic [EW-1:0] e;
    sn_output_node #(.CW(CW), .PW(PW)) u_out (.in0(i0[L][k]), .in1(i1[L][k]), .out0(e));
    assign out_valid[k] = e[EW-1];
    assign out_pay[k]   = e[EW-1] ? e[PW-1:0] : '0;
  end

  assign i0[0] = '0;
  assign i1[0] = '0;
endmodule
